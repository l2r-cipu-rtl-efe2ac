// tb_lr_compressor_6to2: checks that sum_o + carry_o equals the sum of the six
// inputs plus cin modulo 2^W, for random and all-ones inputs.
module tb_lr_compressor_6to2;
  localparam int W = 19;
  logic [5:0][W-1:0] in_vec;
  logic cin;
  logic [W-1:0] s, c;
  int checks = 0, failures = 0;

  lr_compressor_6to2 dut (.in_vec(in_vec), .cin(cin), .sum_o(s), .carry_o(c));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 1000; it++) begin
      logic [W-1:0] ref_sum;
      ref_sum = '0;
      cin = 1'(it);
      for (int v = 0; v < 6; v++) begin
        in_vec[v] = (it < 2) ? '1 : W'($urandom);
        ref_sum   = ref_sum + in_vec[v];
      end
      ref_sum = ref_sum + W'(cin);
      #1;
      checks++;
      if (W'(s + c) != ref_sum) begin
        failures++;
        if (failures < 10) $display("ERR it=%0d got %h expected %h", it, W'(s + c), ref_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
