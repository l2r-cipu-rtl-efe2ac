// tb_lr_digit_sel: exhaustive check of the CPA / SELM / M path over all 256
// pairs of 4-bit tops. The estimate is the 4-bit two's complement sum in
// quarters; the digit must be +1 from 1/4 up, -1 from -3/4 down and 0
// between, and the 3-bit correction must equal estimate - 4*digit.
module tb_lr_digit_sel;
  import l2r_pkg::*;
  logic [3:0] s_top, c_top;
  sd_t z;
  logic [2:0] m_top;
  int checks = 0, failures = 0;

  lr_digit_sel dut (.s_top(s_top), .c_top(c_top), .z(z), .m_top(m_top));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 16; s++) begin
      for (int c = 0; c < 16; c++) begin
        int est, zexp, mexp, zgot, mgot;
        s_top = 4'(s);
        c_top = 4'(c);
        #1;
        est = (s + c) % 16;
        if (est >= 8) est -= 16;
        zexp = (est >= 1) ? 1 : (est <= -3) ? -1 : 0;
        mexp = est - 4 * zexp;
        zgot = int'(z.p) - int'(z.n);
        mgot = int'($signed(m_top));
        checks++;
        if (zgot != zexp || mgot != mexp || (z.p && z.n)) begin
          failures++;
          $display("ERR s=%0d c=%0d est=%0d z=%0d/%0d m=%0d/%0d", s, c, est, zgot, zexp, mgot, mexp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
