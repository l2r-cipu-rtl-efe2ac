// tb_l2r_pe: drives one PE through tiles of 1 to 4 channel-group passes with
// the pass schedule generated here (digit pairs, flush, digit weights,
// accumulator clear on the first pass). After each tile the accumulator must
// hold the sum of the inner products of all its passes; the accumulator must
// also be restarted, not added to, at the start of the next tile.
module tb_l2r_pe;
  import l2r_pkg::*;
  localparam int N = 8;
  localparam int K = 72;
  localparam int L = 15;
  localparam int T = N + L + 2;

  logic clk = 1'b0, rst_n = 1'b0;
  ipu_ctrl_t ctrl;
  acc_ctrl_t acc_ctrl;
  sd_t [K-1:0] a_dig, b_dig;
  logic [31:0] acc;
  int checks = 0, failures = 0;
  logic signed [7:0] a [K], b [K];

  l2r_pe dut (.clk(clk), .rst_n(rst_n), .ctrl(ctrl), .acc_ctrl(acc_ctrl), .a_dig(a_dig), .b_dig(b_dig), .acc(acc));

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
      t = -1;
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
        t = i;
      end else begin
        a_dig = '0;
        b_dig = '0;
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
    a_dig = '0;
    b_dig = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int tile = 0; tile < 12; tile++) begin
      longint exp_v;
      int groups;
      groups = 1 + (tile % 4);
      exp_v = 0;
      for (int g = 0; g < groups; g++) begin
        for (int k = 0; k < K; k++) begin
          a[k] = (tile == 0) ? -128 : 8'($urandom);
          b[k] = (tile == 0) ? -128 : 8'($urandom);
          exp_v += longint'(a[k]) * longint'(b[k]);
        end
        run_pass(g == 0);
      end
      checks++;
      if ($signed(acc) != int'(exp_v)) begin
        failures++;
        $display("ERR tile=%0d acc=%0d expected %0d", tile, $signed(acc), exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
