// tb_weight_buffer: writes random weights into the 8 kernels, then checks
// that the digits of entry k = kernel*9 + position reassemble to the stored
// weight for every entry.
module tb_weight_buffer;
  import l2r_pkg::*;
  localparam int TNK = 8, KS = 9, K = 72;
  logic clk = 1'b0, we;
  logic [2:0] wr_kern;
  logic [3:0] wr_pos;
  logic [7:0] wr_data;
  logic [2:0] rd_digit;
  sd_t [K-1:0] b_dig;
  logic signed [7:0] ref_w [K];
  int checks = 0, failures = 0;

  weight_buffer dut (.clk(clk), .we(we), .wr_kern(wr_kern), .wr_pos(wr_pos), .wr_data(wr_data), .rd_digit(rd_digit), .b_dig(b_dig));

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
    for (int rep = 0; rep < 3; rep++) begin
      int acc [K];
      for (int t = 0; t < TNK; t++)
        for (int p = 0; p < KS; p++) begin
          @(negedge clk);
          we = 1'b1;
          wr_kern = 3'(t);
          wr_pos = 4'(p);
          wr_data = (rep == 0 && t == 0) ? 8'h80 : 8'($urandom);
          ref_w[t*KS + p] = wr_data;
        end
      @(negedge clk);
      we = 1'b0;
      for (int k = 0; k < K; k++) acc[k] = 0;
      for (int d = 0; d < 8; d++) begin
        rd_digit = 3'(d);
        #1;
        for (int k = 0; k < K; k++) acc[k] = 2 * acc[k] + int'(b_dig[k].p) - int'(b_dig[k].n);
      end
      for (int k = 0; k < K; k++) begin
        checks++;
        if (acc[k] != int'(ref_w[k])) begin
          failures++;
          if (failures < 10) $display("ERR k=%0d got %0d expected %0d", k, acc[k], ref_w[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
