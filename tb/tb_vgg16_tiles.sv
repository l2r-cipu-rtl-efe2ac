// tb_vgg16_tiles: runs one 8x8 output tile of one output channel for
// VGG-16 convolution layers with their real input-channel counts through the
// tile at its default sizes: conv1_1 (3 channels, padded with zeros to one
// pass of 8), conv2_1 (64 channels, 8 passes) and conv5_1 (512 channels, 64
// passes). Activations are non-negative (as after ReLU), weights signed; the
// tile is taken from the top-left corner so that zero padding is exercised.
// Each output pixel is compared with a direct 3x3 convolution, and each pass
// must last 81 cycles (82 with the output-buffer write).
module tb_vgg16_tiles;
  localparam int N = 8, L = 15;
  localparam int NL = 3;
  localparam int LAYER_CH [NL] = '{3, 64, 512};

  logic clk = 1'b0, rst_n = 1'b0;
  logic act_we, wgt_we, start, first, last, busy, done;
  logic [5:0] act_cw, ob_rd_addr;
  logic [6:0] act_k;
  logic [7:0] act_data, wgt_data;
  logic [2:0] wgt_kern;
  logic [3:0] wgt_pos;
  logic [31:0] ob_rd_data;
  int checks = 0, failures = 0;
  int cur_ch;

  // Input patch of 9x9 pixels (the tile plus its right/bottom halo; the
  // left/top halo is padding) and one output channel's 3x3 kernels.
  logic signed [7:0] ifm [512][9][9];
  logic signed [7:0] wts [512][3][3];

  l2r_cipu_top dut (
    .clk(clk), .rst_n(rst_n),
    .act_we(act_we), .act_cw(act_cw), .act_k(act_k), .act_data(act_data),
    .wgt_we(wgt_we), .wgt_kern(wgt_kern), .wgt_pos(wgt_pos), .wgt_data(wgt_data),
    .start(start), .first(first), .last(last), .busy(busy), .done(done),
    .ob_rd_addr(ob_rd_addr), .ob_rd_data(ob_rd_data));

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [7:0] px(int c, int y, int x);
    if (c >= cur_ch || y < 0 || x < 0) return 0;
    return ifm[c][y][x];
  endfunction

  function automatic logic signed [7:0] wt(int c, int ky, int kx);
    if (c >= cur_ch) return 0;
    return wts[c][ky][kx];
  endfunction

  task automatic load_group(int g);
    for (int p = 0; p < 64; p++)
      for (int k = 0; k < 72; k++) begin
        @(negedge clk);
        act_we = 1'b1;
        act_cw = 6'(p);
        act_k = 7'(k);
        act_data = px(g * 8 + k / 9, p / 8 + (k % 9) / 3 - 1, p % 8 + (k % 9) % 3 - 1);
      end
    for (int t = 0; t < 8; t++)
      for (int pos = 0; pos < 9; pos++) begin
        @(negedge clk);
        act_we = 1'b0;
        wgt_we = 1'b1;
        wgt_kern = 3'(t);
        wgt_pos = 4'(pos);
        wgt_data = wt(g * 8 + t, pos / 3, pos % 3);
      end
    @(negedge clk);
    act_we = 1'b0;
    wgt_we = 1'b0;
  endtask

  task automatic run_pass(bit f, bit l);
    int cyc;
    start = 1'b1; first = f; last = l;
    @(negedge clk);
    start = 1'b0; first = 1'b0; last = 1'b0;
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
  endtask

  initial begin
    act_we = 0; wgt_we = 0; start = 0; first = 0; last = 0;
    act_cw = '0; act_k = '0; act_data = '0; wgt_kern = '0; wgt_pos = '0; wgt_data = '0;
    ob_rd_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int li = 0; li < NL; li++) begin
      int groups;
      cur_ch = LAYER_CH[li];
      groups = (cur_ch + 7) / 8;
      for (int c = 0; c < cur_ch; c++) begin
        for (int y = 0; y < 9; y++)
          for (int x = 0; x < 9; x++) ifm[c][y][x] = 8'($urandom_range(0, 127));
        for (int ky = 0; ky < 3; ky++)
          for (int kx = 0; kx < 3; kx++) wts[c][ky][kx] = 8'($urandom);
      end
      for (int g = 0; g < groups; g++) begin
        load_group(g);
        run_pass(g == 0, g == groups - 1);
      end
      for (int p = 0; p < 64; p++) begin
        longint ref_v;
        ref_v = 0;
        for (int c = 0; c < cur_ch; c++)
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              ref_v += longint'(px(c, p / 8 + ky - 1, p % 8 + kx - 1)) * longint'(wts[c][ky][kx]);
        ob_rd_addr = 6'(p);
        #1;
        checks++;
        if ($signed(ob_rd_data) != int'(ref_v)) begin
          failures++;
          if (failures < 10) $display("ERR layer %0d pixel %0d: got %0d expected %0d", li, p, $signed(ob_rd_data), ref_v);
        end
      end
      $display("layer with %0d input channels: %0d passes done", cur_ch, groups);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
