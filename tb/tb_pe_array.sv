// tb_pe_array: the full 8x8 array with a different random window per PE and
// one broadcast kernel set, driven through two tiles (two passes, then one
// pass) by a schedule generated here. Every PE's accumulator must equal its
// own reference convolution sum.
module tb_pe_array;
  import l2r_pkg::*;
  localparam int N = 8, K = 72, L = 15, T = N + L + 2, NP = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  ipu_ctrl_t ctrl;
  acc_ctrl_t acc_ctrl;
  sd_t [K-1:0] a_dig [NP];
  sd_t [K-1:0] b_dig;
  logic [31:0] acc [NP];
  logic signed [7:0] a [NP][K], b [K];
  longint exp_v [NP];
  int checks = 0, failures = 0;

  pe_array dut (.clk(clk), .rst_n(rst_n), .ctrl(ctrl), .acc_ctrl(acc_ctrl), .a_dig(a_dig), .b_dig(b_dig), .acc(acc));

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

  task automatic run_pass(input bit first);
    for (int c = 0; c < N * N + L + 2; c++) begin
      int t;
      @(negedge clk);
      ctrl = '0;
      if (c < N * N) begin
        int i, j;
        i = c / N;
        j = c % N;
        for (int p = 0; p < NP; p++)
          for (int k = 0; k < K; k++) a_dig[p][k] = dig(a[p][k], i);
        for (int k = 0; k < K; k++) b_dig[k] = dig(b[k], j);
        ctrl.gate_en = 1'b1;
        ctrl.ppr_en  = 1'b1;
        ctrl.ppr_sel = (j != 0);
        ctrl.res_en  = (j == N - 1);
        ctrl.res_sel = (j == N - 1) && (i != 0);
        t = i;
      end else begin
        ctrl.res_en  = 1'b1;
        ctrl.res_sel = 1'b1;
        t = N + c - N * N;
      end
      acc_ctrl.shift   = SHIFT_W'(T - 1 - t);
      acc_ctrl.acc_clr = first && (t == 0);
    end
    @(negedge clk);
    ctrl = '0;
    acc_ctrl = '0;
  endtask

  initial begin
    ctrl = '0;
    acc_ctrl = '0;
    b_dig = '0;
    for (int p = 0; p < NP; p++) a_dig[p] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int tile = 0; tile < 2; tile++) begin
      for (int p = 0; p < NP; p++) exp_v[p] = 0;
      for (int g = 0; g < 2 - tile; g++) begin
        for (int k = 0; k < K; k++) b[k] = 8'($urandom);
        for (int p = 0; p < NP; p++)
          for (int k = 0; k < K; k++) begin
            a[p][k] = 8'($urandom);
            exp_v[p] += longint'(a[p][k]) * longint'(b[k]);
          end
        run_pass(g == 0);
      end
      for (int p = 0; p < NP; p++) begin
        checks++;
        if ($signed(acc[p]) != int'(exp_v[p])) begin
          failures++;
          if (failures < 10) $display("ERR tile=%0d pe=%0d acc=%0d expected %0d", tile, p, $signed(acc[p]), exp_v[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
