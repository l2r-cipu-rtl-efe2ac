// l2r_cipu_top: one L2R-CIPU accelerator tile.
//
// A convolution layer is computed tile by tile: 64 output pixels (an 8 x 8
// block of the output feature map) of one output channel at a time, in passes
// over groups of T_n = 8 input channels. For each pass the host fills the
// input activation buffer with the 3x3x8 window of each of the 64 pixels and
// the weight buffer with the eight 3x3 kernels of that output channel, then
// pulses start (with first on the first pass of the tile and last on the
// final one). The control unit streams the operands digit by digit, most
// significant first, through the 8 x 8 PE array; every PE's LR inner-product
// unit computes its 72-term inner product and its accumulator adds it to the
// output pixel. After the last pass the 64 pixels (32-bit, not rescaled) are in
// the output buffer, which the host reads through ob_rd_addr/ob_rd_data.
//
// Timing: a pass is busy for N_BITS^2 + L_BITS + 2 cycles (81 at the default
// sizes), plus one when last = 1; done pulses once at the end. The buffers may
// be written while the tile is idle only. The blocks and their connections
// follow the paper's tile drawing (CU, input activation buffer, weight buffer,
// PE array, OB); the host-side ports and the pass protocol are this design's.
module l2r_cipu_top
  import l2r_pkg::sd_t, l2r_pkg::ipu_ctrl_t, l2r_pkg::acc_ctrl_t, l2r_pkg::tc_digit, l2r_pkg::SHIFT_W;
#(
  parameter int unsigned N_BITS = l2r_pkg::N_BITS,
  parameter int unsigned TN     = l2r_pkg::TN,
  parameter int unsigned TR     = l2r_pkg::TR,
  parameter int unsigned TC     = l2r_pkg::TC,
  parameter int unsigned ACC_W  = l2r_pkg::ACC_W,
  localparam int unsigned KWIN    = l2r_pkg::KWIN,
  localparam int unsigned KSZ     = KWIN * KWIN,
  localparam int unsigned K_TERMS = KSZ * TN,
  localparam int unsigned NPE     = TR * TC
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // activation buffer write port
  input  logic                        act_we,
  input  logic [$clog2(NPE)-1:0]      act_cw,
  input  logic [$clog2(K_TERMS)-1:0]  act_k,
  input  logic [N_BITS-1:0]           act_data,
  // weight buffer write port
  input  logic                        wgt_we,
  input  logic [$clog2(TN)-1:0]       wgt_kern,
  input  logic [$clog2(KSZ)-1:0]      wgt_pos,
  input  logic [N_BITS-1:0]           wgt_data,
  // pass control
  input  logic                        start,
  input  logic                        first,
  input  logic                        last,
  output logic                        busy,
  output logic                        done,
  // output buffer read port
  input  logic [$clog2(NPE)-1:0]      ob_rd_addr,
  output logic [ACC_W-1:0]            ob_rd_data
);

  ipu_ctrl_t                 ctrl;
  acc_ctrl_t                 acc_ctrl;
  logic [$clog2(N_BITS)-1:0] a_idx, b_idx;
  logic                      ob_we;
  sd_t [K_TERMS-1:0]         a_dig [NPE];
  sd_t [K_TERMS-1:0]         b_dig;
  logic [ACC_W-1:0]          acc [NPE];

  control_unit #(.N_BITS(N_BITS), .K_TERMS(K_TERMS)) u_cu (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .first    (first),
    .last     (last),
    .ctrl     (ctrl),
    .acc_ctrl (acc_ctrl),
    .a_idx    (a_idx),
    .b_idx    (b_idx),
    .ob_we    (ob_we),
    .busy     (busy),
    .done     (done)
  );

  act_buffer #(.NUM_CW(NPE), .K_TERMS(K_TERMS), .N_BITS(N_BITS)) u_act (
    .clk      (clk),
    .we       (act_we),
    .wr_cw    (act_cw),
    .wr_k     (act_k),
    .wr_data  (act_data),
    .rd_digit (a_idx),
    .a_dig    (a_dig)
  );

  weight_buffer #(.TN(TN), .KWIN(KWIN), .N_BITS(N_BITS)) u_wgt (
    .clk      (clk),
    .we       (wgt_we),
    .wr_kern  (wgt_kern),
    .wr_pos   (wgt_pos),
    .wr_data  (wgt_data),
    .rd_digit (b_idx),
    .b_dig    (b_dig)
  );

  pe_array #(.TR(TR), .TC(TC), .N_BITS(N_BITS), .K_TERMS(K_TERMS), .ACC_W(ACC_W)) u_pes (
    .clk      (clk),
    .rst_n    (rst_n),
    .ctrl     (ctrl),
    .acc_ctrl (acc_ctrl),
    .a_dig    (a_dig),
    .b_dig    (b_dig),
    .acc      (acc)
  );

  output_buffer #(.NUM_PE(NPE), .ACC_W(ACC_W)) u_ob (
    .clk     (clk),
    .we      (ob_we),
    .din     (acc),
    .rd_addr (ob_rd_addr),
    .rd_data (ob_rd_data)
  );

  // Buffers are written only while no pass is running.
  a_no_write_when_busy : assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(act_we || wgt_we));

endmodule
