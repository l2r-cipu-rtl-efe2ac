// tb_l2r_cipu_top: end-to-end test of the tile at its default sizes.
//
// A 3x3 convolution (stride 1, zero padding 1) of an 8x8 input feature map
// with 24 input channels into 2 output channels, plus a third output channel
// computed from the first 8 input channels only, is run through the host
// interface: for each output channel and each group of 8 input channels the
// 64 windows and the 8 kernels are written into the buffers and a pass is
// started (first on the first group, last on the final one); the 64 output
// pixels are then read from the output buffer and compared with a direct
// convolution computed here. Each pass must keep busy for n*n + L + 2 cycles
// (+1 with last). The test also counts the mechanisms of the design and fails
// if one never occurred: accumulator clear (first pass), accumulation onto an
// earlier pass, passes with and without the output buffer write, and output
// digits -1, 0 and +1 of the inner-product units.
module tb_l2r_cipu_top;
  import l2r_pkg::*;
  localparam int N = 8, L = 15;
  localparam int H = 8, CH = 24, MO = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic act_we, wgt_we, start, first, last, busy, done;
  logic [5:0] act_cw, ob_rd_addr;
  logic [6:0] act_k;
  logic [7:0] act_data, wgt_data;
  logic [2:0] wgt_kern;
  logic [3:0] wgt_pos;
  logic [31:0] ob_rd_data;

  logic signed [7:0] ifm [CH][H][H];
  logic signed [7:0] wts [MO][CH][3][3];
  int checks = 0, failures = 0;
  int n_first = 0, n_accum = 0, n_store = 0, n_nostore = 0;
  int n_dig_pos = 0, n_dig_neg = 0, n_dig_zero = 0;

  l2r_cipu_top dut (
    .clk(clk), .rst_n(rst_n),
    .act_we(act_we), .act_cw(act_cw), .act_k(act_k), .act_data(act_data),
    .wgt_we(wgt_we), .wgt_kern(wgt_kern), .wgt_pos(wgt_pos), .wgt_data(wgt_data),
    .start(start), .first(first), .last(last), .busy(busy), .done(done),
    .ob_rd_addr(ob_rd_addr), .ob_rd_data(ob_rd_data));

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output digits of one inner-product unit (PE row 2, column 5).
  always @(posedge clk) begin
    if (dut.u_pes.g_row[2].g_col[5].u_pe.z_valid) begin
      if (dut.u_pes.g_row[2].g_col[5].u_pe.z.p) n_dig_pos++;
      else if (dut.u_pes.g_row[2].g_col[5].u_pe.z.n) n_dig_neg++;
      else n_dig_zero++;
    end
  end

  function automatic logic signed [7:0] px(int c, int y, int x);
    if (y < 0 || y >= H || x < 0 || x >= H) return 0;
    return ifm[c][y][x];
  endfunction

  task automatic load_group(int m, int g);
    for (int p = 0; p < 64; p++)
      for (int k = 0; k < 72; k++) begin
        int c, pos;
        c = g * 8 + k / 9;
        pos = k % 9;
        @(negedge clk);
        act_we = 1'b1;
        act_cw = 6'(p);
        act_k = 7'(k);
        act_data = px(c, p / 8 + pos / 3 - 1, p % 8 + pos % 3 - 1);
      end
    for (int t = 0; t < 8; t++)
      for (int pos = 0; pos < 9; pos++) begin
        @(negedge clk);
        act_we = 1'b0;
        wgt_we = 1'b1;
        wgt_kern = 3'(t);
        wgt_pos = 4'(pos);
        wgt_data = wts[m][g * 8 + t][pos / 3][pos % 3];
      end
    @(negedge clk);
    act_we = 1'b0;
    wgt_we = 1'b0;
  endtask

  task automatic run_pass(bit f, bit l);
    int cyc;
    start = 1'b1;
    first = f;
    last = l;
    @(negedge clk);
    start = 1'b0;
    first = 1'b0;
    last = 1'b0;
    cyc = 0;
    while (!done) begin
      if (busy) cyc++;
      @(negedge clk);
    end
    checks++;
    if (cyc != N * N + L + 2 + (l ? 1 : 0)) begin
      failures++;
      $display("ERR pass took %0d cycles", cyc);
    end
    if (f) n_first++; else n_accum++;
    if (l) n_store++; else n_nostore++;
  endtask

  initial begin
    act_we = 0; wgt_we = 0; start = 0; first = 0; last = 0;
    act_cw = '0; act_k = '0; act_data = '0; wgt_kern = '0; wgt_pos = '0; wgt_data = '0;
    ob_rd_addr = '0;
    for (int c = 0; c < CH; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < H; x++) ifm[c][y][x] = (c == 0) ? -128 : 8'($urandom);
    for (int m = 0; m < MO; m++)
      for (int c = 0; c < CH; c++)
        for (int ky = 0; ky < 3; ky++)
          for (int kx = 0; kx < 3; kx++) wts[m][c][ky][kx] = (m == 0 && c == 0) ? -128 : 8'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < MO; m++) begin
      int groups;
      groups = (m == MO - 1) ? 1 : CH / 8;
      for (int g = 0; g < groups; g++) begin
        load_group(m, g);
        run_pass(g == 0, g == groups - 1);
      end
      for (int p = 0; p < 64; p++) begin
        longint ref_v;
        ref_v = 0;
        for (int c = 0; c < groups * 8; c++)
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              ref_v += longint'(px(c, p / 8 + ky - 1, p % 8 + kx - 1)) * longint'(wts[m][c][ky][kx]);
        ob_rd_addr = 6'(p);
        #1;
        checks++;
        if ($signed(ob_rd_data) != int'(ref_v)) begin
          failures++;
          if (failures < 10) $display("ERR m=%0d pixel %0d: got %0d expected %0d", m, p, $signed(ob_rd_data), ref_v);
        end
      end
    end
    $display("mechanisms: first=%0d accumulate=%0d store=%0d no_store=%0d digits +1=%0d 0=%0d -1=%0d",
             n_first, n_accum, n_store, n_nostore, n_dig_pos, n_dig_zero, n_dig_neg);
    checks++; if (n_first == 0) failures++;
    checks++; if (n_accum == 0) failures++;
    checks++; if (n_store == 0) failures++;
    checks++; if (n_nostore == 0) failures++;
    checks++; if (n_dig_pos == 0) failures++;
    checks++; if (n_dig_zero == 0) failures++;
    checks++; if (n_dig_neg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
