// tb_cm_core: checks one CM core on its own.
//
// The core is programmed as a 3x3 stride-1 layer (3 -> 8 channels, 6x6 map)
// with random weights, scales and biases. Input comes on the external input.
// A residual map arrives on the residual channel of slot 6. Every input pixel
// is forwarded on the residual channel of slot 2. Results go to the
// feedforward channel of slot 5 and to slot 8 (multicast), and to the
// external output. The test then checks:
//  * every result against a convolution + scale + residual + ReLU computed
//    here, on all three destinations;
//  * every forwarded pixel equals the input pixel, in order;
//  * that a result is never sent while one destination is busy (random
//    back-pressure on each destination).
// The residual map is delivered late and slowly, so the core must stall.
// Timing: with the input streaming, no back-pressure and residuals present,
// results must leave at one pixel per clock in the map interior.
module tb_cm_core;
  import pp5_pkg::*;
  localparam int C = 8, MW = 6, H = 6, W = 6, CI = 3, CO = 8;

  logic clk = 0, rst_n = 0;
  logic prg_we = 0;
  prg_t prg = '0;
  layer_cfg_t cfg_o;
  logic ext_in_valid = 0, ext_in_ready, ext_out_valid, ext_out_ready = 0;
  logic [C-1:0][7:0] ext_in_data = '0, ext_out_data;
  logic [9:0] ff_in_valid = '0, ff_in_ready, res_in_valid = '0, res_in_ready;
  logic [9:0][C-1:0][7:0] ff_in_data = '0, res_in_data = '0, ff_out_data, res_out_data;
  logic [9:0] ff_out_valid, ff_out_ready = '0, res_out_valid, res_out_ready = '0;
  int checks = 0, failures = 0;

  cm_core #(.C_MAX(C), .ACT_BITS(8), .MAX_W(MW), .MAX_H(MW), .XBAR_ROWS(72), .XBAR_COLS(8),
            .RES_DEPTH(40)) dut (.*);

  always #5 clk = ~clk;

  byte img [2][H][W][CI], res [2][H][W][CO], gold [2][H][W][CO];
  byte wt [9*CI][CO];
  int  scl [CO], bia [CO];
  localparam int SHIFT = 8;

  task automatic wr(prg_target_e tg, int row, int col, int data, layer_cfg_t lc);
    @(negedge clk);
    prg_we = 1; prg.core = 0; prg.target = tg; prg.row = 10'(row); prg.col = 10'(col);
    prg.data = data; prg.layer = lc;
  endtask

  int n_ff5 = 0, n_ff8 = 0, n_ext = 0, n_fwd = 0, n_res_stall = 0;
  int t_first = 0, t_last = 0, cyc = 0;
  bit fast = 0;

  function automatic void check_out(string nm, int idx, logic [C-1:0][7:0] d);
    int n = idx / (H * W), p = idx % (H * W);
    for (int co = 0; co < CO; co++) begin
      byte got, exp;
      got = byte'(d[co]);
      exp = gold[n][p / W][p % W][co];
      checks++;
      if (got != exp) begin
        failures++;
        if (failures < 10) $display("%s pixel %0d ch %0d: %0d expected %0d", nm, idx, co, got, exp);
      end
    end
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ff_out_valid[5] && ff_out_ready[5]) begin check_out("slot5", n_ff5, ff_out_data[5]); n_ff5++; end
    if (ff_out_valid[8] && ff_out_ready[8]) begin check_out("slot8", n_ff8, ff_out_data[8]); n_ff8++; end
    if (ext_out_valid && ext_out_ready) begin
      check_out("ext", n_ext, ext_out_data); n_ext++;
      if (fast && n_ext == 2 * H * W - 2 * W) t_first = cyc;
      if (fast && n_ext == 2 * H * W - W - 1) t_last = cyc;
    end
    // multicast: all destinations take the result in the same cycle
    if (ff_out_valid[5] != ff_out_valid[8] || ff_out_valid[5] != ext_out_valid) begin
      checks++; failures++; $display("multicast split at cycle %0d", cyc);
    end
    if (res_out_valid[2] && res_out_ready[2]) begin
      automatic int n = n_fwd / (H * W), p = n_fwd % (H * W);
      for (int c = 0; c < CI; c++) begin
        checks++;
        if (byte'(res_out_data[2][c]) != img[n][p / W][p % W][c]) begin
          failures++; $display("forwarded pixel %0d ch %0d wrong", n_fwd, c);
        end
      end
      n_fwd++;
    end
    if (dut.win_valid && !dut.start && dut.cfg.res_en && dut.res_count == 0) n_res_stall++;
  end

  task automatic run_images(bit bp, int img0);
    fork
      for (int n = img0; n < img0 + 1; n++)
        for (int p = 0; p < H * W; p++) begin
          @(negedge clk);
          while (bp && $urandom % 4 == 0) @(negedge clk);
          ext_in_valid = 1; ext_in_data = '0;
          for (int c = 0; c < CI; c++) ext_in_data[c] = img[n][p / W][p % W][c];
          @(posedge clk); while (!ext_in_ready) @(posedge clk);
          #1 ext_in_valid = 0;
        end
      for (int n = img0; n < img0 + 1; n++)
        for (int p = 0; p < H * W; p++) begin
          @(negedge clk);
          if (bp) repeat (2 + $urandom % 2) @(negedge clk);  // late and slow
          res_in_valid[6] = 1;
          for (int c = 0; c < CO; c++) res_in_data[6][c] = res[n][p / W][p % W][c];
          @(posedge clk); while (!res_in_ready[6]) @(posedge clk);
          #1 res_in_valid[6] = 0;
        end
      while (n_ext < (img0 + 1) * H * W) begin
        @(negedge clk);
        ff_out_ready[5]  = bp ? ($urandom % 3 != 0) : 1'b1;
        ff_out_ready[8]  = bp ? ($urandom % 3 != 0) : 1'b1;
        ext_out_ready    = bp ? ($urandom % 3 != 0) : 1'b1;
        res_out_ready[2] = bp ? ($urandom % 3 != 0) : 1'b1;
      end
    join
  endtask

  initial begin
    layer_cfg_t lc = '0;
    for (int n = 0; n < 2; n++)
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        for (int c = 0; c < CI; c++) img[n][y][x][c] = byte'($urandom % 128);
        for (int c = 0; c < CO; c++) res[n][y][x][c] = byte'($signed($urandom % 64) - 32);
      end
    foreach (wt[r, c]) wt[r][c] = byte'($signed($urandom % 15) - 7);
    foreach (scl[c]) begin scl[c] = 8 + $urandom % 16; bia[c] = $signed($urandom % 4000) - 2000; end
    for (int n = 0; n < 2; n++)
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
        for (int co = 0; co < CO; co++) begin
          automatic longint a = 0, v;
          for (int t = 0; t < 9; t++)
            for (int ci = 0; ci < CI; ci++) begin
              automatic int yy = y + t / 3 - 1, xx = x + t % 3 - 1;
              if (yy >= 0 && yy < H && xx >= 0 && xx < W) a += longint'(img[n][yy][xx][ci]) * longint'(wt[t * CI + ci][co]);
            end
          v = ((a * scl[co] + bia[co]) >>> SHIFT) + res[n][y][x][co];
          if (v < 0) v = 0;
          if (v > 127) v = 127;
          gold[n][y][x][co] = byte'(v);
        end
    lc.c_in = CI; lc.c_out = CO; lc.k3 = 1; lc.h = H; lc.w = W; lc.res_en = 1; lc.relu_en = 1;
    lc.shift = SHIFT; lc.in_sel = 4'(SLOT_EXT); lc.res_sel = 6;
    lc.out_ff_mask = 10'b01_0010_0000; lc.out_ext = 1; lc.fwd_mask = 10'b00_0000_0100;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(PRG_LAYER, 0, 0, 0, lc);
    for (int co = 0; co < CO; co++) begin
      wr(PRG_SCALE, 0, co, scl[co], '0);
      wr(PRG_BIAS, 0, co, bia[co], '0);
    end
    foreach (wt[r, c]) wr(PRG_WEIGHT, r, c, int'(wt[r][c]), '0);
    @(negedge clk); prg_we = 0;
    checks++;
    if (cfg_o != lc) begin failures++; $display("configuration not stored"); end
    run_images(1, 0);
    fast = 1;
    run_images(0, 1);
    checks += 4;
    if (n_ff5 != 2 * H * W || n_ff8 != 2 * H * W || n_ext != 2 * H * W) begin
      failures++; $display("result counts %0d %0d %0d", n_ff5, n_ff8, n_ext);
    end
    if (n_fwd != 2 * H * W) begin failures++; $display("forwarded %0d", n_fwd); end
    if (n_res_stall == 0) begin failures++; $display("never waited for a residual"); end
    // W-1 results of one interior row in W-1 clocks
    if (t_last - t_first != W - 1) begin
      failures++; $display("interior row took %0d clocks for %0d results", t_last - t_first, W);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
