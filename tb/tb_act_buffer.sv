// tb_act_buffer: fills all 64 windows with random activations and checks,
// for every digit index, that the signed digits presented on the read port
// reassemble (weights 2^7 .. 2^0) to each stored two's complement value, and
// that each digit uses a legal code.
module tb_act_buffer;
  import l2r_pkg::*;
  localparam int NC = 64, K = 72;
  logic clk = 1'b0, we;
  logic [5:0] wr_cw;
  logic [6:0] wr_k;
  logic [7:0] wr_data;
  logic [2:0] rd_digit;
  sd_t [K-1:0] a_dig [NC];
  logic signed [7:0] ref_mem [NC][K];
  int checks = 0, failures = 0;

  act_buffer dut (.clk(clk), .we(we), .wr_cw(wr_cw), .wr_k(wr_k), .wr_data(wr_data), .rd_digit(rd_digit), .a_dig(a_dig));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1'b0;
    rd_digit = '0;
    for (int c = 0; c < NC; c++)
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        we = 1'b1;
        wr_cw = 6'(c);
        wr_k = 7'(k);
        wr_data = (c == 0 && k == 0) ? 8'h80 : (c == 0 && k == 1) ? 8'h7f : 8'($urandom);
        ref_mem[c][k] = wr_data;
      end
    @(negedge clk);
    we = 1'b0;
    begin
      int acc [NC][K];
      bit bad_code;
      bad_code = 1'b0;
      for (int c = 0; c < NC; c++) for (int k = 0; k < K; k++) acc[c][k] = 0;
      for (int d = 0; d < 8; d++) begin
        rd_digit = 3'(d);
        #1;
        for (int c = 0; c < NC; c++)
          for (int k = 0; k < K; k++) begin
            acc[c][k] = 2 * acc[c][k] + int'(a_dig[c][k].p) - int'(a_dig[c][k].n);
            if (a_dig[c][k].p && a_dig[c][k].n) bad_code = 1'b1;
          end
      end
      for (int c = 0; c < NC; c++)
        for (int k = 0; k < K; k++) begin
          checks++;
          if (acc[c][k] != int'(ref_mem[c][k])) begin
            failures++;
            if (failures < 10) $display("ERR cw=%0d k=%0d got %0d expected %0d", c, k, acc[c][k], ref_mem[c][k]);
          end
        end
      checks++;
      if (bad_code) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
