// lr_ipu: left-to-right (most significant digit first) composite inner
// product unit.
//
// It computes P = sum_{k} a_k * b_k over K_TERMS pairs of N_BITS-bit operands
// that arrive as signed-digit strings, most significant digit first:
// a_k = sum_i A_{k,i} 2^(n-1-i), b_k = sum_j B_{k,j} 2^(n-1-j). Rearranged as
// in the paper, P = sum_i sum_j (sum_k A_{k,i} B_{k,j}) 2^((n-1-i)+(n-1-j)),
// so one cycle handles one digit pair (i, j) of all k products at once:
//   - lr_ppg forms the k digit products PP_{i,j}, lr_counter_neg counts them;
//   - the PPR (partial product row) register builds row i of the array,
//     PPR <- 2*PPR + PP_{i,j}, restarted from zero through the PPR select
//     multiplexer at j = 0;
//   - every n cycles (j = n-1) the residual select multiplexer also lets the
//     residual in, so the same 6:2 compressor forms v = 2*w + row_i. From v
//     lr_digit_sel picks one output digit z (MSDF) and the corrected top bits
//     of the new residual.
// Both registers keep carry-save pairs; the most significant bit of each is
// never read, because doubling shifts it out and the value it would carry is
// already bounded (|2w| < 2 for the residual, |2*PPR| < 2^(L+1) for the row),
// so arithmetic modulo 2^W is exact. After the n*n input cycles the unit
// needs L+2 further "flush" steps (ctrl.res_sel = ctrl.res_en = 1, no operand
// digits), one digit each; L = row_bits(K_TERMS, N_BITS). The output is then
// N_BITS + L + 2 signed digits z_0 .. z_{T-1} whose value
// sum_t z_t 2^(T-1-t) is exactly P, and the residual has returned to zero.
// With the paper's sizes (k = 72, n = 8) that is L = 15, W = 19, 64 input
// cycles and 17 flush cycles, 25 digits in all.
//
// Interface: all sequencing comes from the control word ctrl (see l2r_pkg),
// which the control unit drives; z/z_valid are combinational outputs valid in
// the cycle in which ctrl.res_en is high. Registers reset to zero
// (asynchronous, active low).
//
// Follows the paper: the digit-pair schedule, the PPR and residual registers
// with their zero/shift multiplexers and enables, the shared 6:2 compressor,
// the 4-bit CPA / SELM / 3-bit M path. This design's own choices: the number
// system, the scaling of rows into the residual (row_i enters at 2^-2 of the
// residual's unit, i.e. an online delay of two digits), the selection
// thresholds, the PPR register keeping all W bits (the diagram prints
// 2(W-4) there), and the flush phase that drains the remaining digits.
module lr_ipu
  import l2r_pkg::sd_t, l2r_pkg::ipu_ctrl_t, l2r_pkg::acc_ctrl_t, l2r_pkg::tc_digit, l2r_pkg::SHIFT_W;
#(
  parameter int unsigned N_BITS  = l2r_pkg::N_BITS,
  parameter int unsigned K_TERMS = l2r_pkg::K_TERMS,
  parameter int unsigned L_BITS  = l2r_pkg::row_bits(K_TERMS, N_BITS),
  parameter int unsigned W       = L_BITS + 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ipu_ctrl_t         ctrl,
  input  sd_t [K_TERMS-1:0] a_dig,
  input  sd_t [K_TERMS-1:0] b_dig,
  output sd_t               z,
  output logic              z_valid
);

  // Carry-save registers.
  logic [W-1:0] res_s, res_c, ppr_s, ppr_c;

  sd_t [K_TERMS-1:0] pp;
  logic [W-1:0]      cnt_pos, cnt_neg_n;
  logic [5:0][W-1:0] cmp_in;
  logic [W-1:0]      cmp_s, cmp_c;
  logic [2:0]        m_top;

  lr_ppg #(.K_TERMS(K_TERMS)) u_ppg (
    .en    (ctrl.gate_en),
    .a_dig (a_dig),
    .b_dig (b_dig),
    .pp    (pp)
  );

  lr_counter_neg #(.K_TERMS(K_TERMS), .W(W)) u_cnt (
    .pp    (pp),
    .pos   (cnt_pos),
    .neg_n (cnt_neg_n)
  );

  // Residual Sel and PPR Sel multiplexers: shifted register value or zero.
  always_comb begin
    cmp_in[0] = ctrl.res_sel ? {res_s[W-2:0], 1'b0} : '0;
    cmp_in[1] = ctrl.res_sel ? {res_c[W-2:0], 1'b0} : '0;
    cmp_in[2] = cnt_pos;
    cmp_in[3] = cnt_neg_n;
    cmp_in[4] = ctrl.ppr_sel ? {ppr_s[W-2:0], 1'b0} : '0;
    cmp_in[5] = ctrl.ppr_sel ? {ppr_c[W-2:0], 1'b0} : '0;
  end

  lr_compressor_6to2 #(.W(W)) u_cmp (
    .in_vec  (cmp_in),
    .cin     (1'b1),
    .sum_o   (cmp_s),
    .carry_o (cmp_c)
  );

  lr_digit_sel u_sel (
    .s_top (cmp_s[W-1:W-4]),
    .c_top (cmp_c[W-1:W-4]),
    .z     (z),
    .m_top (m_top)
  );

  assign z_valid = ctrl.res_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_s <= '0;
      res_c <= '0;
      ppr_s <= '0;
      ppr_c <= '0;
    end else begin
      if (ctrl.res_en) begin
        res_s <= {m_top[2], m_top, cmp_s[W-5:0]};
        res_c <= {4'b0000, cmp_c[W-5:0]};
      end
      if (ctrl.ppr_en) begin
        ppr_s <= cmp_s;
        ppr_c <= cmp_c;
      end
    end
  end

  // The residual may only be added in the cycles in which it is updated.
  a_res_sel_only_on_update : assert property (@(posedge clk) disable iff (!rst_n)
    ctrl.res_sel |-> ctrl.res_en);

endmodule
