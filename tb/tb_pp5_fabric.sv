// tb_pp5_fabric: checks the 5PP interconnect against Algorithm 1.
//
// The reference topology is built here independently of the RTL. Starting
// from unit graph 1 = {a1..f1} (vertices 0..5), each next unit graph reuses
// c_j, d_j, e_j, f_j as its a, b, c, d and adds two new vertices as e, f. Two
// cores are neighbours when some unit graph (a K6) holds both. The test then
// drives, one sender at a time, a word tagged with (core, slot, channel) on
// every feedforward and residual slot of every core. It checks that
// * a slot with a reference neighbour is ready and its word arrives, one
//   clock later, exactly at the mirror slot of that neighbour and nowhere
//   else;
// * a slot without a neighbour is never ready and delivers nothing.
// It also checks the edge count of the reference for 202 cores against the
// 897 interconnections the paper reports for 5PP.
module tb_pp5_fabric;
  localparam int N = 40;
  localparam int C = 2;
  logic clk = 0, rst_n = 0;
  logic [N-1:0][9:0] ff_tx_valid = '0, ff_tx_ready, res_tx_valid = '0, res_tx_ready;
  logic [N-1:0][9:0] ff_rx_valid, ff_rx_ready = '1, res_rx_valid, res_rx_ready = '1;
  logic [N-1:0][9:0][C-1:0][7:0] ff_tx_data = '0, res_tx_data = '0, ff_rx_data, res_rx_data;
  int checks = 0, failures = 0;

  pp5_fabric #(.N_CORES(N), .C_MAX(C), .ACT_BITS(8)) dut (.*);

  always #5 clk = ~clk;

  // Reference adjacency from the construction of Algorithm 1.
  function automatic bit ref_adj(int s, int t, int n);
    int M, va[$], vb[$], vc[$], vd[$], ve[$], vf[$], nxt;
    M = (n <= 6) ? 1 : (n - 6 + 1) / 2 + 1;  // ceil((n-6)/2)+1
    va.push_back(0); vb.push_back(1); vc.push_back(2);
    vd.push_back(3); ve.push_back(4); vf.push_back(5);
    nxt = 6;
    for (int j = 0; j < M - 1; j++) begin
      va.push_back(vc[j]); vb.push_back(vd[j]);
      vc.push_back(ve[j]); vd.push_back(vf[j]);
      ve.push_back(nxt); vf.push_back(nxt + 1);
      nxt += 2;
    end
    if (s == t || s >= n || t >= n || s < 0 || t < 0) return 0;
    for (int j = 0; j < M; j++) begin
      int u[6] = '{va[j], vb[j], vc[j], vd[j], ve[j], vf[j]};
      bit hs = 0, ht = 0;
      foreach (u[i]) begin
        if (u[i] == s) hs = 1;
        if (u[i] == t) ht = 1;
      end
      if (hs && ht) return 1;
    end
    return 0;
  endfunction

  function automatic int off(int k); return (k < 5) ? k - 5 : k - 4; endfunction

  int edges, nrx, links;
  initial begin
    // paper: 897 interconnections for the 5PP used with DenseNet-201 (202 cores)
    edges = 0;
    for (int s = 0; s < 202; s++)
      for (int t = s + 1; t < 202; t++) edges += ref_adj(s, t, 202);
    checks++;
    if (edges != 897) begin failures++; $display("reference edges(202) = %0d", edges); end
    checks++;
    if (pp5_pkg::pp5_edges(202) != 897) begin failures++; $display("pkg edges(202) wrong"); end

    repeat (2) @(posedge clk);
    rst_n = 1;
    links = 0;
    for (int s = 0; s < N; s++)
      for (int k = 0; k < 10; k++)
        for (int ch = 0; ch < 2; ch++) begin
          automatic int t = s + off(k);
          automatic bit adj = ref_adj(s, t, N);
          automatic logic [15:0] tag = 16'({ch[0], 6'(s), 4'(k)}) | 16'h8000;
          @(negedge clk);
          checks++;
          if ((ch ? res_tx_ready[s][k] : ff_tx_ready[s][k]) !== adj) begin
            failures++;
            $display("core %0d slot %0d ch %0d: ready=%b expected %b", s, k, ch,
                     ch ? res_tx_ready[s][k] : ff_tx_ready[s][k], adj);
          end
          if (ch) begin res_tx_valid[s][k] = 1; res_tx_data[s][k] = tag; end
          else    begin ff_tx_valid[s][k]  = 1; ff_tx_data[s][k]  = tag; end
          @(negedge clk);
          ff_tx_valid = '0; res_tx_valid = '0;
          // one clock later the word is at the receiver
          nrx = 0;
          for (int r = 0; r < N; r++)
            for (int j = 0; j < 10; j++) begin
              if (ff_rx_valid[r][j] || res_rx_valid[r][j]) begin
                nrx++;
                checks++;
                if (!adj || r != t || j != 9 - k || (ch ? !res_rx_valid[r][j] : !ff_rx_valid[r][j])
                    || (ch ? res_rx_data[r][j] : ff_rx_data[r][j]) != tag) begin
                  failures++;
                  $display("core %0d slot %0d ch %0d: word seen at core %0d slot %0d", s, k, ch, r, j);
                end
              end
            end
          checks++;
          if (nrx != (adj ? 1 : 0)) begin
            failures++;
            $display("core %0d slot %0d ch %0d: %0d receivers", s, k, ch, nrx);
          end
          links += adj;
        end
    // every undirected edge has 2 directions x 2 channels
    checks++;
    if (links != 4 * pp5_pkg::pp5_edges(N)) begin failures++; $display("links %0d", links); end
    $display("5PP with %0d cores: %0d edges, %0d channels", N, links / 4, links);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
