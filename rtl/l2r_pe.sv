// l2r_pe: processing element of the L2R-CIPU tile.
//
// One LR inner-product unit (lr_ipu) and an accumulator. The unit emits the
// inner product of one 3x3x8 window with the kernel as a string of signed
// digits, most significant first. Each digit is added into the accumulation
// register at its own weight, acc <- acc + z * 2^shift, with shift supplied
// by the control unit; the digit that starts a new output pixel
// (acc_ctrl.acc_clr) replaces the old content instead. In this way the inner
// products of successive groups of 8 input channels are summed into one
// output pixel in place, with a single adder and register as in the paper's
// PE drawing ("+" and "Acc. Reg"). The accumulator is updated in the cycle
// after z_valid; acc is a registered output. Weighting each digit by a shift
// rather than converting the digit string first is this design's choice.
module l2r_pe
  import l2r_pkg::sd_t, l2r_pkg::ipu_ctrl_t, l2r_pkg::acc_ctrl_t, l2r_pkg::tc_digit, l2r_pkg::SHIFT_W;
#(
  parameter int unsigned N_BITS  = l2r_pkg::N_BITS,
  parameter int unsigned K_TERMS = l2r_pkg::K_TERMS,
  parameter int unsigned ACC_W   = l2r_pkg::ACC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ipu_ctrl_t         ctrl,
  input  acc_ctrl_t         acc_ctrl,
  input  sd_t [K_TERMS-1:0] a_dig,
  input  sd_t [K_TERMS-1:0] b_dig,
  output logic [ACC_W-1:0]  acc
);

  sd_t  z;
  logic z_valid;
  logic [ACC_W-1:0] term, base;

  lr_ipu #(.N_BITS(N_BITS), .K_TERMS(K_TERMS)) u_ipu (
    .clk     (clk),
    .rst_n   (rst_n),
    .ctrl    (ctrl),
    .a_dig   (a_dig),
    .b_dig   (b_dig),
    .z       (z),
    .z_valid (z_valid)
  );

  always_comb begin
    logic [ACC_W-1:0] mag;
    mag  = ACC_W'(1) << acc_ctrl.shift;
    term = z.p ? mag : (z.n ? (~mag + ACC_W'(1)) : '0);
    base = acc_ctrl.acc_clr ? '0 : acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       acc <= '0;
    else if (z_valid) acc <= base + term;
  end

endmodule
