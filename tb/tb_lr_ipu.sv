// tb_lr_ipu: drives the LR inner-product unit with the digit-pair schedule
// (64 input cycles, then L+2 flush cycles) for random and extreme 72-term
// operand sets. The output digits, weighted most significant first, must add
// up to the exact inner product; the unit must emit exactly n + L + 2 digits
// and the last one in cycle n*n + L + 2 of the pass.
module tb_lr_ipu;
  import l2r_pkg::*;
  localparam int N = 8;
  localparam int K = 72;
  localparam int L = 15;
  localparam int T = N + L + 2;

  logic clk = 1'b0, rst_n = 1'b0;
  ipu_ctrl_t ctrl;
  sd_t [K-1:0] a_dig, b_dig;
  sd_t z;
  logic z_valid;
  int checks = 0, failures = 0;
  int cycle_no;

  logic signed [7:0] a [K], b [K];

  lr_ipu dut (.clk(clk), .rst_n(rst_n), .ctrl(ctrl), .a_dig(a_dig), .b_dig(b_dig), .z(z), .z_valid(z_valid));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sd_t dig(logic signed [7:0] x, int d);
    sd_t r;
    r.p = (d == 0) ? 1'b0 : x[7-d];
    r.n = (d == 0) ? x[7] : 1'b0;
    return r;
  endfunction

  task automatic run_pass(output longint value, output int ndig, output int last_cycle);
    value = 0;
    ndig = 0;
    last_cycle = 0;
    for (int c = 0; c < N * N + L + 2; c++) begin
      @(negedge clk);
      ctrl = '0;
      if (c < N * N) begin
        int i, j;
        i = c / N;
        j = c % N;
        for (int k = 0; k < K; k++) begin
          a_dig[k] = dig(a[k], i);
          b_dig[k] = dig(b[k], j);
        end
        ctrl.gate_en = 1'b1;
        ctrl.ppr_en  = 1'b1;
        ctrl.ppr_sel = (j != 0);
        ctrl.res_en  = (j == N - 1);
        ctrl.res_sel = (j == N - 1) && (i != 0);
      end else begin
        a_dig = '0;
        b_dig = '0;
        ctrl.res_en  = 1'b1;
        ctrl.res_sel = 1'b1;
      end
      @(posedge clk);
      if (z_valid) begin
        value = 2 * value + (longint'(z.p) - longint'(z.n));
        ndig++;
        last_cycle = c + 1;
      end
    end
    @(negedge clk);
    ctrl = '0;
  endtask

  initial begin
    ctrl = '0;
    a_dig = '0;
    b_dig = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 40; it++) begin
      longint exp_v, got;
      int nd, lc;
      exp_v = 0;
      for (int k = 0; k < K; k++) begin
        case (it)
          0: begin a[k] = -128; b[k] = -128; end
          1: begin a[k] = -128; b[k] = 127; end
          2: begin a[k] = 127;  b[k] = 127; end
          3: begin a[k] = 0;    b[k] = -128; end
          4: begin a[k] = 8'(k * 37 + 1); b[k] = -8'(k * 11 + 5); end
          default: begin a[k] = 8'($urandom); b[k] = 8'($urandom); end
        endcase
        exp_v += longint'(a[k]) * longint'(b[k]);
      end
      run_pass(got, nd, lc);
      checks++;
      if (got != exp_v) begin
        failures++;
        $display("ERR it=%0d digits give %0d, expected %0d", it, got, exp_v);
      end
      checks++;
      if (nd != T) begin
        failures++;
        $display("ERR it=%0d %0d digits, expected %0d", it, nd, T);
      end
      checks++;
      if (lc != N * N + L + 2) begin
        failures++;
        $display("ERR it=%0d last digit in cycle %0d, expected %0d", it, lc, N * N + L + 2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
