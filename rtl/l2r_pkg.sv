// l2r_pkg: types and default sizes shared by the L2R-CIPU accelerator tile.
//
// Numbers in the datapath are radix-2 signed digits (values -1, 0, +1), each
// carried on two wires {p, n} with value p - n, and streamed most significant
// digit first. An 8-bit two's complement operand x is turned into such a digit
// string without any arithmetic: digit 0 (weight 2^7) is -x[7], digit d>0
// (weight 2^(7-d)) is +x[7-d]. That encoding, the digit code and all widths
// that the paper does not print are choices of this implementation; the 8-bit
// precision, the 3x3 window, T_n = 8 input channels per pass and the 8x8 PE
// array are the paper's numbers.
package l2r_pkg;

  // Operand precision n (bits per activation and per weight).
  localparam int unsigned N_BITS = 8;
  // Input channels handled in one pass (T_n) and convolution window size.
  localparam int unsigned TN     = 8;
  localparam int unsigned KWIN   = 3;
  // Products summed by one inner-product unit: 3 x 3 x T_n.
  localparam int unsigned K_TERMS = KWIN * KWIN * TN;
  // PE array (T_r x T_c output pixels per tile).
  localparam int unsigned TR     = 8;
  localparam int unsigned TC     = 8;
  localparam int unsigned NUM_PE = TR * TC;
  // Output pixel accumulator width.
  localparam int unsigned ACC_W  = 32;
  // Width of the digit-weight (shift) field sent to the accumulators.
  localparam int unsigned SHIFT_W = 6;

  // Bits L such that one row of the partial-product array, whose magnitude is
  // at most k * (2^n - 1), is below 2^L.
  function automatic int unsigned row_bits(int unsigned k, int unsigned n);
    return $clog2(k * ((1 << n) - 1) + 1);
  endfunction

  // One signed digit: value = p - n.
  typedef struct packed {
    logic p;
    logic n;
  } sd_t;

  // Control word of one LR inner-product unit (the select and enable inputs
  // of the unit's block diagram plus the operand gate).
  typedef struct packed {
    logic gate_en;  // operand digits are valid this cycle
    logic ppr_sel;  // 1: PPR << 1 enters the compressor, 0: zero
    logic res_sel;  // 1: residual << 1 enters the compressor, 0: zero
    logic ppr_en;   // load the PPR register
    logic res_en;   // load the residual register and emit one output digit
  } ipu_ctrl_t;

  // Control of the PE accumulators, issued with each output digit.
  typedef struct packed {
    logic               acc_clr;  // this digit starts a new output pixel
    logic [SHIFT_W-1:0] shift;    // weight 2^shift of the current digit
  } acc_ctrl_t;

  // Signed digit d (0 = most significant) of an n-bit two's complement value.
  function automatic sd_t tc_digit(logic [15:0] x, int unsigned n, int unsigned d);
    sd_t r;
    if (d == 0) begin
      r.p = 1'b0;
      r.n = x[n-1];
    end else begin
      r.p = x[n-1-d];
      r.n = 1'b0;
    end
    return r;
  endfunction

endpackage
