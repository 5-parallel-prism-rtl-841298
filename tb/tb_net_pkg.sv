// tb_net_pkg: network description and golden model for the array tests.
//
// A network is a list of layers, each placed on one core of the 5PP array.
// Layer i takes its input from layer src (or the external input, src = -1).
// It may add the output of layer res_src as residual (-1: none). From this
// list the package derives each core's routing configuration:
//  * feedforward: src's core sends its results to this core's input memory;
//  * residual: if the residual map is the input of src (a ResNet shortcut),
//    src's core forwards every input pixel it receives to this core.
//    Otherwise (a resampled shortcut) res_src's core sends its results to
//    this core's output memory directly.
// The golden model computes every layer's output map in plain integer
// arithmetic, following the arithmetic the hardware is specified to perform
// (crossbar row order tap*c_in + channel, scale, bias, shift, residual, ReLU,
// 8-bit saturation). Each layer's shift is chosen from its own sums so that
// the activations use most of the 8-bit range.
package tb_net_pkg;
  import pp5_pkg::*;

  typedef byte bvec_t[];
  typedef int  ivec_t[];

  typedef struct {
    int core;
    int src, res_src;
    int cin, cout, h, w;
    bit k3, s2, gp, relu;
  } layer_t;

  class net_c;
    layer_t  L[$];
    byte     img[];            // external input map, h*w*cin
    bvec_t   omap[$];          // output map of every layer, oh*ow*cout
    int      oh[$], ow[$];
    bvec_t   wt[$];            // weights: [(tap*cin+ci)*cout + co]
    ivec_t   scl[$], bia[$];
    int      shf[$];
    int      n_cores;

    function new(int n);
      n_cores = n;
    endfunction

    function int add(int core, int src, int res_src, int cin, int cout, int h, int w,
                     bit k3, bit s2, bit gp, bit relu);
      layer_t l;
      l.core = core; l.src = src; l.res_src = res_src; l.cin = cin; l.cout = cout;
      l.h = h; l.w = w; l.k3 = k3; l.s2 = s2; l.gp = gp; l.relu = relu;
      L.push_back(l);
      return L.size() - 1;
    endfunction

    function int taps(int i); return (L[i].k3 && !L[i].gp) ? 9 : 1; endfunction

    // value of the input map of layer i at (y, x, c); 0 outside
    function int in_px(int i, int y, int x, int c);
      if (y < 0 || x < 0 || y >= L[i].h || x >= L[i].w) return 0;
      if (L[i].src < 0) return img[(y * L[i].w + x) * L[i].cin + c];
      return omap[L[i].src][(y * L[i].w + x) * L[i].cin + c];
    endfunction

    // Golden model of the whole network for the input map img. With pick set
    // it first draws random weights, scales and biases and picks each
    // layer's shift; otherwise it reuses them.
    function void eval(bit pick);
      if (!pick) begin
        omap.delete(); oh.delete(); ow.delete();
      end
      foreach (L[i]) begin
        automatic int rows = taps(i) * L[i].cin;
        automatic int o_h = L[i].gp ? 1 : (L[i].s2 ? (L[i].h + 1) / 2 : L[i].h);
        automatic int o_w = L[i].gp ? 1 : (L[i].s2 ? (L[i].w + 1) / 2 : L[i].w);
        automatic longint accs[] = new[o_h * o_w * L[i].cout];
        automatic longint mx = 1;
        automatic int pooled[] = new[L[i].cin];
        oh.push_back(o_h); ow.push_back(o_w);
        if (pick) begin
          automatic bvec_t wv = new[rows * L[i].cout];
          automatic ivec_t sv = new[L[i].cout], bv = new[L[i].cout];
          wt.push_back(wv); scl.push_back(sv); bia.push_back(bv);
          foreach (wt[i][j]) wt[i][j] = byte'($signed($urandom % 31) - 15);
          foreach (scl[i][j]) scl[i][j] = 16 + $urandom % 48;
        end
        if (L[i].gp)
          for (int c = 0; c < L[i].cin; c++) begin
            automatic int s = 0;
            for (int y = 0; y < L[i].h; y++) for (int x = 0; x < L[i].w; x++) s += in_px(i, y, x, c);
            pooled[c] = s >>> $clog2(L[i].h * L[i].w);
            pooled[c] = int'(byte'(pooled[c]));
          end
        for (int r = 0; r < o_h; r++)
          for (int q = 0; q < o_w; q++)
            for (int co = 0; co < L[i].cout; co++) begin
              automatic longint a = 0;
              automatic int cy = L[i].s2 ? 2 * r : r, cx = L[i].s2 ? 2 * q : q;
              for (int t = 0; t < taps(i); t++)
                for (int ci = 0; ci < L[i].cin; ci++) begin
                  automatic int v;
                  if (L[i].gp) v = (t == 0) ? pooled[ci] : 0;
                  else if (taps(i) == 9) v = in_px(i, cy + t / 3 - 1, cx + t % 3 - 1, ci);
                  else v = in_px(i, cy, cx, ci);
                  a += longint'(v) * longint'(wt[i][(t * L[i].cin + ci) * L[i].cout + co]);
                end
              accs[(r * o_w + q) * L[i].cout + co] = a;
              if (a * scl[i][co] > mx) mx = a * scl[i][co];
              if (-a * scl[i][co] > mx) mx = -a * scl[i][co];
            end
        // shift so that the largest scaled sum lands near 90
        if (pick) begin
          automatic int s = 0;
          while ((mx >>> s) > 90 && s < 31) s++;
          shf.push_back(s);
          foreach (bia[i][j]) bia[i][j] = ($signed($urandom % 21) - 10) * (1 << shf[i]);
        end
        begin
          automatic bvec_t ov = new[o_h * o_w * L[i].cout];
          omap.push_back(ov);
        end
        for (int p = 0; p < o_h * o_w; p++)
          for (int co = 0; co < L[i].cout; co++) begin
            automatic longint v = (accs[p * L[i].cout + co] * scl[i][co] + bia[i][co]) >>> shf[i];
            if (L[i].res_src >= 0) v += omap[L[i].res_src][p * L[i].cout + co];
            if (L[i].relu && v < 0) v = 0;
            if (v > 127) v = 127;
            if (v < -128) v = -128;
            omap[i][p * L[i].cout + co] = byte'(v);
          end
      end
    endfunction

    // layer whose output is the residual input of layer i via forwarding?
    function bit res_by_forwarding(int i);
      return L[i].res_src >= 0 && L[i].src >= 0 && L[L[i].src].src == L[i].res_src;
    endfunction

    // Routing configuration of layer i's core.
    function layer_cfg_t cfg(int i, int last);
      layer_cfg_t c = '0;
      c.c_in = 10'(L[i].cin); c.c_out = 10'(L[i].cout);
      c.k3 = L[i].k3; c.stride2 = L[i].s2; c.gpool = L[i].gp;
      c.h = 8'(L[i].h); c.w = 8'(L[i].w);
      c.res_en = L[i].res_src >= 0; c.relu_en = L[i].relu; c.shift = 5'(shf[i]);
      c.in_sel = L[i].src < 0 ? 4'(SLOT_EXT) : 4'(offset_slot(L[L[i].src].core - L[i].core));
      if (L[i].res_src >= 0)
        c.res_sel = res_by_forwarding(i) ? 4'(offset_slot(L[L[i].src].core - L[i].core))
                                         : 4'(offset_slot(L[L[i].res_src].core - L[i].core));
      foreach (L[j]) begin
        if (L[j].src == i) c.out_ff_mask[offset_slot(L[j].core - L[i].core)] = 1'b1;
        if (L[j].res_src >= 0 && !res_by_forwarding(j) && L[j].res_src == i)
          c.out_res_mask[offset_slot(L[j].core - L[i].core)] = 1'b1;
        if (res_by_forwarding(j) && L[j].src == i)
          c.fwd_mask[offset_slot(L[j].core - L[i].core)] = 1'b1;
      end
      c.out_ext = (i == last);
      return c;
    endfunction

    // every edge the mapping uses must be a 5PP edge
    function int illegal_edges();
      int n = 0;
      foreach (L[i]) begin
        if (L[i].src >= 0 && !pp5_adjacent(L[i].core, L[L[i].src].core, n_cores)) n++;
        if (L[i].res_src >= 0) begin
          automatic int from = res_by_forwarding(i) ? L[L[i].src].core : L[L[i].res_src].core;
          if (!pp5_adjacent(L[i].core, from, n_cores)) n++;
        end
      end
      return n;
    endfunction

    // ResNet-(6n+2) for CIFAR: conv1, three stages of n basic blocks
    // (16, 32, 64 channels), 1x1 stride-2 resampling shortcuts, global
    // average pooling and a fully connected layer (as a 1x1 layer on the
    // pooled pixel). Cores are taken in 5PP order; each resampling layer sits
    // between the last layer of a stage and the first layer of the next.
    function void resnet(int nblk, int hw, int c0, int ncls);
      int core = 0, prev, blk_in, r, a, b, ch = c0, sz = hw;
      prev = add(core++, -1, -1, 3, ch, sz, sz, 1, 0, 0, 1);   // conv1
      for (int st = 0; st < 3; st++)
        for (int bl = 0; bl < nblk; bl++) begin
          blk_in = prev;
          if (st > 0 && bl == 0) begin
            r = add(core++, prev, -1, ch, 2 * ch, sz, sz, 0, 1, 0, 0);  // resampling
            a = add(core++, prev, -1, ch, 2 * ch, sz, sz, 1, 1, 0, 1);  // stride 2
            ch = 2 * ch; sz = (sz + 1) / 2;
            b = add(core++, a, r, ch, ch, sz, sz, 1, 0, 0, 1);
          end else begin
            a = add(core++, prev, -1, ch, ch, sz, sz, 1, 0, 0, 1);
            b = add(core++, a, blk_in, ch, ch, sz, sz, 1, 0, 0, 1);
          end
          prev = b;
        end
      void'(add(core++, prev, -1, ch, ncls, sz, sz, 0, 0, 1, 0));      // pool + FC
    endfunction
  endclass

endpackage
