// weight_buffer: kernel (weight) buffer of the L2R-CIPU tile.
//
// Holds the TN = 8 kernels K_1 .. K_8 (3 x 3 x 1 weights each) that one
// output channel applies to the 8 input channels of the current pass; all 64
// PEs use the same kernels (output tiling T_m = 1), so the buffer's read port
// is broadcast. The paper's drawing labels the kernels K_1 .. K_m with
// K = 3x3x1; reading m as the T_n input channels of one pass is this design's
// interpretation. The host writes one 8-bit two's complement weight per cycle
// (we, wr_kern, wr_pos). The read side presents, combinationally, signed digit
// rd_digit (0 = most significant) of all K_TERMS = 72 weights in the order
// k = kernel*9 + position, matching act_buffer: this is the B_j input of every
// inner-product unit. Register array without reset.
module weight_buffer
  import l2r_pkg::sd_t, l2r_pkg::ipu_ctrl_t, l2r_pkg::acc_ctrl_t, l2r_pkg::tc_digit, l2r_pkg::SHIFT_W;
#(
  parameter int unsigned TN     = l2r_pkg::TN,
  parameter int unsigned KWIN   = l2r_pkg::KWIN,
  parameter int unsigned N_BITS = l2r_pkg::N_BITS,
  localparam int unsigned KSZ     = KWIN * KWIN,
  localparam int unsigned K_TERMS = KSZ * TN
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [$clog2(TN)-1:0]       wr_kern,
  input  logic [$clog2(KSZ)-1:0]      wr_pos,
  input  logic [N_BITS-1:0]           wr_data,
  input  logic [$clog2(N_BITS)-1:0]   rd_digit,
  output sd_t [K_TERMS-1:0]           b_dig
);

  logic [N_BITS-1:0] kern [TN][KSZ];

  always_ff @(posedge clk) begin
    if (we) kern[wr_kern][wr_pos] <= wr_data;
  end

  always_comb begin
    for (int t = 0; t < TN; t++)
      for (int p = 0; p < KSZ; p++)
        b_dig[t*KSZ + p] = tc_digit(16'(kern[t][p]), N_BITS, int'(rd_digit));
  end

endmodule
