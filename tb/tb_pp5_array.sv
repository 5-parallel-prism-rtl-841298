// tb_pp5_array: end-to-end test of the 5PP array on a small residual network.
//
// The network is a ResNet-8 for 8x8 images: conv1 (3 -> 4 channels), one
// basic block per stage (4, 8, 16 channels), resampling 1x1 stride-2
// shortcuts, global average pooling and a 10-way fully connected layer.
// Its 10 layers are mapped one per core in 5PP order, so every transfer is
// one hop. The array is scaled down (10 cores, 16 channels, 8x8 maps,
// 144x16 crossbars) to keep the run short. The test programs all cores
// through the programming port, streams seven images back to back with
// random gaps, and applies random back-pressure on the output. At first the
// output is held off completely. The last core absorbs six images (four
// results queued, a fifth pooled window waiting, a sixth map summed), so
// the seventh image must wait on the link into that core, whatever the
// random gaps are. The output is released after the first link wait. It checks:
//  * every pixel every layer sends (feedforward or resampled shortcut),
//    against the golden model, in order;
//  * the ten class scores of each image at the array output;
//  * that the mapping uses only 5PP edges.
// Mechanisms counted, each of which must occur: input stalls (array not
// ready), pixels waiting at a link because the receiving core is busy,
// forwarded shortcut pixels, resampled shortcut pixels, stride-2 and
// pooled layers producing output, and results multicast to two cores.
module tb_pp5_array;
  import pp5_pkg::*;
  import tb_net_pkg::*;

  localparam int N = 10, C = 16, MW = 8, XR = 144, XC = 16;
  localparam int IMGS = 7;

  logic clk = 0, rst_n = 0;
  logic prg_valid = 0;
  prg_t prg = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [C-1:0][7:0] in_data = '0, out_data;
  int checks = 0, failures = 0;

  pp5_array #(.N_CORES(N), .C_MAX(C), .ACT_BITS(8), .MAX_W(MW), .MAX_H(MW),
              .XBAR_ROWS(XR), .XBAR_COLS(XC)) dut (.*);

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
    net.resnet(1, MW, 4, 10);
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
            while ($urandom % 4 == 0) @(negedge clk);
            in_valid = 1;
            in_data = '0;
            for (int c = 0; c < 3; c++) in_data[c] = imgs[n][p * 3 + c];
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            #1 in_valid = 0;
          end
      end
      begin : drain
        while (seen[last] < IMGS) begin
          @(negedge clk);
          out_ready = (n_link_wait > 0) && ($urandom % 3 != 0);
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
    checks++; if (n_stall == 0)     begin failures++; $display("no input stall"); end
    checks++; if (n_link_wait == 0) begin failures++; $display("no link wait"); end
    checks++; if (n_fwd == 0)       begin failures++; $display("no forwarded shortcut"); end
    checks++; if (n_resamp == 0)    begin failures++; $display("no resampled shortcut"); end
    checks++; if (n_s2 == 0)        begin failures++; $display("no stride-2 output"); end
    checks++; if (n_pool == 0)      begin failures++; $display("no pooled output"); end
    checks++; if (n_multi == 0)     begin failures++; $display("no multicast"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: layers' pixel counts:");
    foreach (seen[i]) $display("  layer %0d: %0d", i, seen[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
