// tb_resnet32: the paper's case study, ResNet-32 for CIFAR-10, on the
// array at its default size.
//
// The array keeps all its default parameters: 40 cores, 576x576 crossbars,
// 64 channels, 32x32 maps. The network is ResNet-32 with random weights:
// conv1 (3 -> 16 channels), three stages of five basic blocks (16, 32 and
// 64 channels on 32x32, 16x16 and 8x8 maps), 1x1 stride-2 resampling
// shortcuts, global average pooling and a 10-way fully connected layer.
// That is 34 layers, mapped one per core in 5PP order: every feedforward
// edge spans 1 or 2 cores and every shortcut spans 1 or 2 cores, all of
// them 5PP edges. The test programs the array, runs two 32x32 images
// through it back to back and checks every pixel every layer sends against
// the golden model (tb_net_pkg), including the ten class scores. It counts
// the same mechanisms as tb_pp5_array, except that pixels waiting at a link
// are only reported, not required: a core that waits for its residual or
// a layer that consumes at a lower rate can briefly hold a pixel on a
// link even at full rate. It also checks the pipeline rate:
// with the input never idle and the output always ready, the array must
// take the second image at one pixel per clock on average (within 5 %).
module tb_resnet32;
  import pp5_pkg::*;
  import tb_net_pkg::*;

  localparam int N = 40, C = 64, MW = 32;
  localparam int IMGS = 2;

  logic clk = 0, rst_n = 0;
  logic prg_valid = 0;
  prg_t prg = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [C-1:0][7:0] in_data = '0, out_data;
  int checks = 0, failures = 0;
  int cyc = 0, t_img1 = 0, t_img1_end = 0;
  always @(posedge clk) cyc <= cyc + 1;

  pp5_array dut (.*);

  always #5 clk = ~clk;

  net_c net;
  byte  imgs [IMGS][];
  bvec_t gold [IMGS][$];      // per image, per layer output maps
  int   last;

  // ---------------------------------------------------------- programming
  task automatic prg_write(int core, prg_target_e tg, int row, int col, int data, layer_cfg_t lc);
    @(negedge clk);
    prg_valid = 1;
    prg.core = 8'(core); prg.target = tg; prg.row = 10'(row); prg.col = 10'(col);
    prg.data = data; prg.layer = lc;
  endtask

  task automatic program_all();
    foreach (net.L[i]) begin
      prg_write(net.L[i].core, PRG_LAYER, 0, 0, 0, net.cfg(i, last));
      for (int co = 0; co < net.L[i].cout; co++) begin
        prg_write(net.L[i].core, PRG_SCALE, 0, co, net.scl[i][co], '0);
        prg_write(net.L[i].core, PRG_BIAS, 0, co, net.bia[i][co], '0);
      end
      for (int r = 0; r < net.taps(i) * net.L[i].cin; r++)
        for (int co = 0; co < net.L[i].cout; co++)
          prg_write(net.L[i].core, PRG_WEIGHT, r, co, int'(net.wt[i][r * net.L[i].cout + co]), '0);
    end
    @(negedge clk); prg_valid = 0;
  endtask

  // ------------------------------------------------------------- monitors
  int seen [$];                 // pixels seen per layer (over all images)
  int mon_core [$], mon_slot [$];
  bit mon_res [$];
  logic [9:0] fwdm [N];
  int n_stall = 0, n_link_wait = 0, n_fwd = 0, n_resamp = 0, n_s2 = 0, n_pool = 0, n_multi = 0;

  function automatic void check_px(int i, logic [C-1:0][7:0] d);
    int img = seen[i] / (net.oh[i] * net.ow[i]);
    int p   = seen[i] % (net.oh[i] * net.ow[i]);
    for (int co = 0; co < C; co++) begin
      byte e = (co < net.L[i].cout && img < IMGS) ? gold[img][i][p * net.L[i].cout + co] : 0;
      checks++;
      if (byte'(d[co]) != e) begin
        failures++;
        if (failures < 20) $display("layer %0d image %0d pixel %0d ch %0d: %0d expected %0d",
                                    i, img, p, co, byte'(d[co]), e);
      end
    end
    seen[i]++;
  endfunction

  always @(posedge clk) if (rst_n && net != null && mon_core.size() == net.L.size()) begin
    if (in_valid && !in_ready) n_stall++;
    for (int s = 0; s < N; s++)
      for (int k = 0; k < 10; k++) begin
        if (dut.ff_rx_valid[s][k] && !dut.ff_rx_ready[s][k]) n_link_wait++;
        if (dut.res_tx_valid[s][k] && dut.res_tx_ready[s][k]) begin
          if (fwdm[s][k]) n_fwd++; else n_resamp++;
        end
      end
    foreach (net.L[i]) begin
      automatic int s = mon_core[i], k = mon_slot[i];
      if (i == last) begin
        if (out_valid && out_ready) begin
          check_px(i, out_data);
          n_pool++;
        end
      end else if (mon_res[i] ? (dut.res_tx_valid[s][k] && dut.res_tx_ready[s][k])
                              : (dut.ff_tx_valid[s][k] && dut.ff_tx_ready[s][k])) begin
        check_px(i, mon_res[i] ? dut.res_tx_data[s][k] : dut.ff_tx_data[s][k]);
        if (net.L[i].s2) n_s2++;
        if ($countones(dut.ff_tx_valid[s]) + $countones(dut.res_tx_valid[s] & ~net.cfg(i, last).fwd_mask) > 1)
          n_multi++;
      end
    end
  end

  initial begin
    net = new(N);
    net.resnet(5, MW, 16, 10);
    last = net.L.size() - 1;
    for (int n = 0; n < IMGS; n++) begin
      imgs[n] = new[MW * MW * 3];
      foreach (imgs[n][j]) imgs[n][j] = byte'($signed($urandom % 128) - 64);
      net.img = imgs[n];
      net.eval(n == 0);
      foreach (net.L[i]) gold[n].push_back(net.omap[i]);
    end
    checks++;
    if (net.illegal_edges() != 0) begin failures++; $display("mapping uses non-5PP edges"); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (fwdm[s]) fwdm[s] = '0;
    program_all();
    foreach (net.L[i]) begin
      automatic layer_cfg_t c = net.cfg(i, last);
      automatic int k = 0;
      seen.push_back(0);
      fwdm[net.L[i].core] = c.fwd_mask;
      mon_res.push_back(c.out_ff_mask == 0);
      for (int j = 9; j >= 0; j--) if (c.out_ff_mask[j] || (c.out_ff_mask == 0 && c.out_res_mask[j])) k = j;
      mon_core.push_back(net.L[i].core);
      mon_slot.push_back(k);
    end
    fork
      begin : feed
        for (int n = 0; n < IMGS; n++)
          for (int p = 0; p < MW * MW; p++) begin
            @(negedge clk);
            if (n == 1 && p == 0) t_img1 = cyc;
            in_valid = 1;
            in_data = '0;
            for (int c = 0; c < 3; c++) in_data[c] = imgs[n][p * 3 + c];
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            #1 in_valid = 0;
            if (n == 1 && p == MW * MW - 1) t_img1_end = cyc;
          end
      end
      begin : drain
        while (seen[last] < IMGS) begin
          @(negedge clk);
          out_ready = 1'b1;
        end
      end
    join
    repeat (20) @(posedge clk);
    foreach (net.L[i]) begin
      checks++;
      if (seen[i] != IMGS * net.oh[i] * net.ow[i]) begin
        failures++; $display("layer %0d sent %0d pixels, expected %0d", i, seen[i], IMGS * net.oh[i] * net.ow[i]);
      end
    end
    $display("input stalls %0d, link waits %0d, forwarded shortcut pixels %0d, resampled shortcut pixels %0d",
             n_stall, n_link_wait, n_fwd, n_resamp);
    $display("stride-2 pixels %0d, pooled outputs %0d, multicast results %0d", n_s2, n_pool, n_multi);
    $display("second image: %0d pixels taken in %0d clocks", MW * MW, t_img1_end - t_img1);
    checks++;
    if ((t_img1_end - t_img1) * 100 > MW * MW * 105) begin failures++; $display("pipeline rate below one pixel per clock"); end
    checks++; if (n_stall == 0)     begin failures++; $display("no input stall"); end
    checks++; if (n_fwd == 0)       begin failures++; $display("no forwarded shortcut"); end
    checks++; if (n_resamp == 0)    begin failures++; $display("no resampled shortcut"); end
    checks++; if (n_s2 == 0)        begin failures++; $display("no stride-2 output"); end
    checks++; if (n_pool == 0)      begin failures++; $display("no pooled output"); end
    checks++; if (n_multi == 0)     begin failures++; $display("no multicast"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog: layers' pixel counts:");
    foreach (seen[i]) $display("  layer %0d: %0d", i, seen[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
