// pe_array: the T_r x T_c = 8 x 8 array of processing elements.
//
// Every PE (l2r_pe) receives the digits of its own convolution window
// (a_dig[p], p = row*TC + column) and the same kernel digits b_dig, which are
// broadcast to all PEs, as well as the common control words; so all 64 PEs
// work in lock step on 64 neighbouring output pixels of one output channel.
// acc[p] is PE p's accumulator. The array follows the paper's tile drawing;
// the broadcast wiring is this design's reading of it.
module pe_array
  import l2r_pkg::sd_t, l2r_pkg::ipu_ctrl_t, l2r_pkg::acc_ctrl_t, l2r_pkg::tc_digit, l2r_pkg::SHIFT_W;
#(
  parameter int unsigned TR      = l2r_pkg::TR,
  parameter int unsigned TC      = l2r_pkg::TC,
  parameter int unsigned N_BITS  = l2r_pkg::N_BITS,
  parameter int unsigned K_TERMS = l2r_pkg::K_TERMS,
  parameter int unsigned ACC_W   = l2r_pkg::ACC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ipu_ctrl_t         ctrl,
  input  acc_ctrl_t         acc_ctrl,
  input  sd_t [K_TERMS-1:0] a_dig [TR*TC],
  input  sd_t [K_TERMS-1:0] b_dig,
  output logic [ACC_W-1:0]  acc [TR*TC]
);

  for (genvar r = 0; r < TR; r++) begin : g_row
    for (genvar c = 0; c < TC; c++) begin : g_col
      l2r_pe #(.N_BITS(N_BITS), .K_TERMS(K_TERMS), .ACC_W(ACC_W)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .ctrl     (ctrl),
        .acc_ctrl (acc_ctrl),
        .a_dig    (a_dig[r*TC + c]),
        .b_dig    (b_dig),
        .acc      (acc[r*TC + c])
      );
    end
  end

endmodule
