// tb_lr_counter_neg: checks the counter and negation stage. For random digit
// vectors (including all +1 and all -1) pos must be the number of +1 digits
// and pos + neg_n + 1 must equal (number of +1) - (number of -1) modulo 2^W.
module tb_lr_counter_neg;
  import l2r_pkg::*;
  localparam int K = 72;
  localparam int W = 19;
  sd_t [K-1:0] pp;
  logic [W-1:0] pos, neg_n;
  int checks = 0, failures = 0;

  lr_counter_neg dut (.pp(pp), .pos(pos), .neg_n(neg_n));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      int np, nn;
      logic [W-1:0] s;
      np = 0; nn = 0;
      for (int k = 0; k < K; k++) begin
        int r;
        r = (it == 0) ? 1 : (it == 1) ? 2 : $urandom_range(0, 2);
        pp[k] = (r == 1) ? sd_t'(2'b10) : (r == 2) ? sd_t'(2'b01) : sd_t'(2'b00);
        if (r == 1) np++;
        if (r == 2) nn++;
      end
      #1;
      s = pos + neg_n + W'(1);
      checks++;
      if (int'(pos) != np) begin
        failures++;
        $display("ERR it=%0d pos=%0d expected %0d", it, pos, np);
      end
      checks++;
      if (s != W'(np - nn)) begin
        failures++;
        $display("ERR it=%0d sum=%0d expected %0d", it, $signed(s), np - nn);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
