// tb_control_unit: starts passes with all four first/last combinations and
// compares every cycle of each pass with the schedule worked out here: 64
// digit-pair cycles (indices, PPR select/enable, residual select/enable),
// 17 flush cycles, the digit weight and accumulator clear of every digit,
// the output buffer write, busy and the one-cycle done pulse. It also checks
// that a pass lasts n*n + L + 2 cycles, plus one with last.
module tb_control_unit;
  import l2r_pkg::*;
  localparam int N = 8, L = 15, T = N + L + 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, first, last;
  ipu_ctrl_t ctrl;
  acc_ctrl_t acc_ctrl;
  logic [2:0] a_idx, b_idx;
  logic ob_we, busy, done;
  int checks = 0, failures = 0;

  control_unit dut (.clk(clk), .rst_n(rst_n), .start(start), .first(first), .last(last),
                    .ctrl(ctrl), .acc_ctrl(acc_ctrl), .a_idx(a_idx), .b_idx(b_idx),
                    .ob_we(ob_we), .busy(busy), .done(done));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what, int c);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("ERR cycle %0d: %s", c, what);
    end
  endtask

  initial begin
    start = 0; first = 0; last = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 8; rep++) begin
      bit f, l;
      int len, busy_cnt;
      f = rep[0];
      l = rep[1];
      @(negedge clk);
      check(!busy && !done, "idle before start", -1);
      start = 1'b1; first = f; last = l;
      @(negedge clk);
      start = 1'b0; first = 1'b0; last = 1'b0;
      len = N * N + L + 2 + (l ? 1 : 0);
      busy_cnt = 0;
      for (int c = 0; c < len; c++) begin
        ipu_ctrl_t e;
        int t;
        e = '0;
        t = -1;
        if (c < N * N) begin
          e.gate_en = 1; e.ppr_en = 1;
          e.ppr_sel = (c % N) != 0;
          e.res_en  = (c % N) == N - 1;
          e.res_sel = e.res_en && (c / N) != 0;
          if (e.res_en) t = c / N;
          check(int'(a_idx) == c / N && int'(b_idx) == c % N, "digit indices", c);
        end else if (c < N * N + L + 2) begin
          e.res_en = 1; e.res_sel = 1;
          t = N + c - N * N;
        end
        check(ctrl == e, $sformatf("ctrl %b expected %b", ctrl, e), c);
        if (t >= 0) begin
          check(int'(acc_ctrl.shift) == T - 1 - t, "digit weight", c);
          check(acc_ctrl.acc_clr == (f && t == 0), "acc_clr", c);
        end
        check(ob_we == (l && c == len - 1), "ob_we", c);
        check(!done, "no early done", c);
        if (busy) busy_cnt++;
        @(negedge clk);
      end
      check(busy_cnt == len, $sformatf("busy for %0d cycles, expected %0d", busy_cnt, len), len);
      check(done && !busy, "done pulse at the end", len);
      @(negedge clk);
      check(!done, "done is one cycle", len + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
