// act_buffer: input activation buffer of the L2R-CIPU tile.
//
// Holds one convolution window CW (3 x 3 x 8 activations, K_TERMS entries)
// for each of the NUM_CW = 64 PEs, as in the paper's tile drawing
// (CW_1 .. CW_64, CW = 3x3x8). Entry k of a window is input channel k/9,
// window position k%9 (row-major); this layout is a choice of this design.
// The host writes one 8-bit two's complement activation per cycle
// (we, wr_cw, wr_k, wr_data). The read side presents, combinationally, signed
// digit rd_digit (0 = most significant) of all entries of every window, which
// is the A_i input of each PE's inner-product unit; the conversion from two's
// complement to signed digits (see l2r_pkg::tc_digit) is wiring only.
// The storage is a register array without reset: every entry must be written
// before it is used.
module act_buffer
  import l2r_pkg::sd_t, l2r_pkg::ipu_ctrl_t, l2r_pkg::acc_ctrl_t, l2r_pkg::tc_digit, l2r_pkg::SHIFT_W;
#(
  parameter int unsigned NUM_CW  = l2r_pkg::NUM_PE,
  parameter int unsigned K_TERMS = l2r_pkg::K_TERMS,
  parameter int unsigned N_BITS  = l2r_pkg::N_BITS
) (
  input  logic                          clk,
  input  logic                          we,
  input  logic [$clog2(NUM_CW)-1:0]     wr_cw,
  input  logic [$clog2(K_TERMS)-1:0]    wr_k,
  input  logic [N_BITS-1:0]             wr_data,
  input  logic [$clog2(N_BITS)-1:0]     rd_digit,
  output sd_t [K_TERMS-1:0]             a_dig [NUM_CW]
);

  logic [N_BITS-1:0] mem [NUM_CW][K_TERMS];

  always_ff @(posedge clk) begin
    if (we) mem[wr_cw][wr_k] <= wr_data;
  end

  always_comb begin
    for (int c = 0; c < NUM_CW; c++)
      for (int k = 0; k < K_TERMS; k++)
        a_dig[c][k] = tc_digit(16'(mem[c][k]), N_BITS, int'(rd_digit));
  end

endmodule
