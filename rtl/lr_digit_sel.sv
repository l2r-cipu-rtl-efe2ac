// lr_digit_sel: output digit selection of the LR inner-product unit (the
// 4-bit CPA, the selection function SELM and the residual correction M of the
// paper's block diagram).
//
// The residual v is held in carry-save form in units of 2^-(W-4) of a
// fraction whose top bits weigh -2, 1, 1/2, 1/4. The CPA adds the four top
// bits of the sum and of the carry vector (modulo 16), giving an estimate
// est of v in quarters that lies at most 1/2 below v. SELM picks the output
// digit
//     z = +1 if est >= 1/4,  z = -1 if est <= -3/4,  z = 0 otherwise,
// and M forms est - z, which always fits three bits (weights -1, 1/2, 1/4) and
// replaces the four top bits of the next residual. With a residual bound of
// |w| < 3/4 and inputs scaled to below 1/4 this keeps the residual bounded in
// every step. The thresholds and the bound are this design's; the paper gives
// the block names and the 4- and 3-bit widths only. Combinational.
module lr_digit_sel
  import l2r_pkg::sd_t, l2r_pkg::ipu_ctrl_t, l2r_pkg::acc_ctrl_t, l2r_pkg::tc_digit, l2r_pkg::SHIFT_W;
(
  input  logic [3:0] s_top,
  input  logic [3:0] c_top,
  output sd_t        z,
  output logic [2:0] m_top
);

  logic signed [3:0] est;
  logic signed [3:0] m_full;

  always_comb begin
    est = signed'(s_top + c_top);
    if (est >= 4'sd1) begin
      z      = '{p: 1'b1, n: 1'b0};
      m_full = est - 4'sd4;
    end else if (est <= -4'sd3) begin
      z      = '{p: 1'b0, n: 1'b1};
      m_full = est + 4'sd4;
    end else begin
      z      = '0;
      m_full = est;
    end
    m_top = m_full[2:0];
  end

endmodule
