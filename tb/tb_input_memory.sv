// tb_input_memory: checks convolution-window generation of the input memory.
//
// For several layer shapes it streams two random images back to back, with
// random gaps on the input and random back-pressure on the windows:
// 3x3 stride 1, 3x3 stride 2, 1x1 stride 2 (resampling), a non-square map,
// and global average pooling. Every window tap and channel is compared with
// the window cut here from the image (zero outside the map, centre
// (S*r, S*c)). So are the number of windows and the last-window flag. The
// test also counts how often the memory refused a pixel because the buffer
// held data still needed (the input stall). That must happen, because the
// windows are back-pressured. Timing: with no back-pressure, the first
// window of a 3x3 stride-1 map must be offered one clock after the clock
// edge that accepts pixel (1,1), the (W+2)-th pixel.
module tb_input_memory;
  localparam int C = 3, MW = 8, MH = 8;
  logic clk = 0, rst_n = 0;
  pp5_pkg::layer_cfg_t cfg = '0;
  logic in_valid = 0, in_ready, win_valid, win_ready = 0, win_last;
  logic [C-1:0][7:0] in_data = '0;
  logic [8:0][C-1:0][7:0] win;
  int checks = 0, failures = 0, stalls = 0;

  input_memory #(.C_MAX(C), .ACT_BITS(8), .MAX_W(MW), .MAX_H(MH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (in_valid && !in_ready) stalls++;

  byte img [2][MH][MW][C];

  function automatic byte px(int n, int y, int x, int c, int h, int w);
    if (y < 0 || y >= h || x < 0 || x >= w) return 0;
    return img[n][y][x][c];
  endfunction

  task automatic run(bit k3, bit s2, bit gp, int h, int w, bit gaps);
    int oh, ow, nwin, cnt;
    cfg = '0;
    cfg.k3 = k3; cfg.stride2 = s2; cfg.gpool = gp;
    cfg.h = 8'(h); cfg.w = 8'(w); cfg.c_in = 10'(C);
    oh = gp ? 1 : (s2 ? (h + 1) / 2 : h);
    ow = gp ? 1 : (s2 ? (w + 1) / 2 : w);
    for (int n = 0; n < 2; n++)
      for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) for (int c = 0; c < C; c++)
        img[n][y][x][c] = byte'($urandom);
    nwin = 0;
    fork
      begin : feed
        for (int n = 0; n < 2; n++)
          for (int p = 0; p < h * w; p++) begin
            @(negedge clk);
            while (gaps && $urandom % 3 == 0) @(negedge clk);
            in_valid = 1;
            for (int c = 0; c < C; c++) in_data[c] = img[n][p / w][p % w][c];
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            #1 in_valid = 0;
          end
      end
      begin : drain
        while (nwin < 2 * oh * ow) begin
          @(negedge clk);
          win_ready = gaps ? ($urandom % 4 != 0) : 1'b1;
          @(posedge clk);
          if (win_valid && win_ready) begin
            automatic int n = nwin / (oh * ow), o = nwin % (oh * ow);
            automatic int r = o / ow, q = o % ow;
            automatic int cy = s2 ? 2 * r : r, cx = s2 ? 2 * q : q;
            for (int t = 0; t < 9; t++)
              for (int c = 0; c < C; c++) begin
                automatic byte e = 0;
                if (gp) begin
                  if (t == 0) begin
                    automatic int s = 0;
                    for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) s += img[n][y][x][c];
                    e = byte'(s >>> $clog2(h * w));
                  end
                end else if (k3) e = px(n, cy + t / 3 - 1, cx + t % 3 - 1, c, h, w);
                else if (t == 0) e = px(n, cy, cx, c, h, w);
                checks++;
                if (byte'(win[t][c]) != e) begin
                  failures++;
                  if (failures < 10) $display("k3=%0d s2=%0d gp=%0d win %0d tap %0d ch %0d: %0d expected %0d",
                                              k3, s2, gp, nwin, t, c, byte'(win[t][c]), e);
                end
              end
            checks++;
            if (win_last != (o == oh * ow - 1)) begin failures++; $display("win_last wrong at %0d", nwin); end
            nwin++;
          end
        end
      end
    join
    @(negedge clk); win_ready = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1, 0, 0, 8, 8, 1);
    run(1, 1, 0, 8, 8, 1);
    run(0, 1, 0, 8, 8, 1);
    run(1, 0, 0, 5, 7, 1);
    run(1, 1, 0, 7, 5, 1);
    run(0, 0, 1, 4, 4, 1);
    run(1, 0, 0, 8, 8, 0);
    checks++;
    if (stalls == 0) begin failures++; $display("input stall never happened"); end
    // latency of the first window, 3x3 stride 1, 8x8
    cfg.k3 = 1; cfg.stride2 = 0; cfg.gpool = 0; cfg.h = 8; cfg.w = 8;
    win_ready = 0;
    for (int p = 0; p < 11; p++) begin
      @(negedge clk); in_valid = 1; in_data = '0;
      @(posedge clk);
      #1 checks++;
      if (win_valid != (p == 10)) begin failures++; $display("first window after pixel %0d: %b", p, win_valid); end
    end
    @(negedge clk); in_valid = 0;
    $display("input stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
