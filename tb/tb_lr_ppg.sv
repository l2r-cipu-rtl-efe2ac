// tb_lr_ppg: checks the digit-product generator. Random signed digits (all
// four codes, value p - n) are applied with the gate on and off; every
// product's value must equal the product of the operand values, and all
// products must be zero with the gate off.
module tb_lr_ppg;
  import l2r_pkg::*;
  localparam int K = 72;
  logic en;
  sd_t [K-1:0] a, b, pp;
  int checks = 0, failures = 0;

  lr_ppg dut (.en(en), .a_dig(a), .b_dig(b), .pp(pp));

  function automatic int val(sd_t d);
    return int'(d.p) - int'(d.n);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 200; it++) begin
      en = (it % 4) != 3;
      for (int k = 0; k < K; k++) begin
        a[k] = sd_t'($urandom_range(0, 3));
        b[k] = sd_t'($urandom_range(0, 3));
      end
      #1;
      for (int k = 0; k < K; k++) begin
        int exp_v;
        exp_v = en ? val(a[k]) * val(b[k]) : 0;
        checks++;
        if (val(pp[k]) != exp_v) begin
          failures++;
          if (failures < 10) $display("ERR it=%0d k=%0d a=%0d b=%0d pp=%0d", it, k, val(a[k]), val(b[k]), val(pp[k]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
