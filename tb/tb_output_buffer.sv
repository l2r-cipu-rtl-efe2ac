// tb_output_buffer: captures two different sets of 64 values and reads every
// entry back; also checks that the content holds while we is low.
module tb_output_buffer;
  localparam int NP = 64;
  logic clk = 1'b0, we;
  logic [31:0] din [NP];
  logic [31:0] ref_v [NP];
  logic [5:0] rd_addr;
  logic [31:0] rd_data;
  int checks = 0, failures = 0;

  output_buffer dut (.clk(clk), .we(we), .din(din), .rd_addr(rd_addr), .rd_data(rd_data));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1'b0;
    rd_addr = '0;
    for (int rep = 0; rep < 2; rep++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        din[p] = $urandom;
        ref_v[p] = din[p];
      end
      we = 1'b1;
      @(negedge clk);
      we = 1'b0;
      for (int p = 0; p < NP; p++) din[p] = ~ref_v[p];
      repeat (2) @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        rd_addr = 6'(p);
        #1;
        checks++;
        if (rd_data != ref_v[p]) begin
          failures++;
          if (failures < 10) $display("ERR rep=%0d p=%0d got %h expected %h", rep, p, rd_data, ref_v[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
