// output_buffer: output buffer (OB) of the L2R-CIPU tile.
//
// When the control unit ends the last channel-group pass of a tile it raises
// we for one cycle and the buffer captures the accumulators of all NUM_PE PEs
// at once (the paper: "the output is saved directly to the output buffer").
// The host then reads the 64 output pixels one at a time; rd_data follows
// rd_addr combinationally. Entry p holds PE p = row*8 + column. The parallel
// capture and the read port are this design's choices; the paper only names
// the buffer. Register array without reset.
module output_buffer
  import l2r_pkg::sd_t, l2r_pkg::ipu_ctrl_t, l2r_pkg::acc_ctrl_t, l2r_pkg::tc_digit, l2r_pkg::SHIFT_W;
#(
  parameter int unsigned NUM_PE = l2r_pkg::NUM_PE,
  parameter int unsigned ACC_W  = l2r_pkg::ACC_W
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [ACC_W-1:0]           din [NUM_PE],
  input  logic [$clog2(NUM_PE)-1:0]  rd_addr,
  output logic [ACC_W-1:0]           rd_data
);

  logic [ACC_W-1:0] mem [NUM_PE];

  always_ff @(posedge clk) begin
    if (we) mem <= din;
  end

  assign rd_data = mem[rd_addr];

endmodule
