// pp5_pkg: types, constants and topology functions shared by the 5 Parallel
// Prism (5PP) array of computational-memory (CM) cores.
//
// Topology. Algorithm 1 of the 5PP construction glues a chain of complete
// graphs K6 ("unit graphs", 2x3 neighbourhoods of cores) by identifying the
// last four vertices of unit j with the first four of unit j+1. Numbering the
// cores in the order a1, b1, a2, b2, ... (index s = 2(j-1) for a_j and
// 2(j-1)+1 for b_j), unit j covers indices 2j-2 .. 2j+3. Two cores s < t are
// therefore adjacent when t-s <= 4, or when t-s == 5 and s is even (an "a"
// core). A core thus reaches at most five cores ahead of it, which gives the
// topology its name. For 202 cores this yields 897 edges, the number of
// interconnections quoted for 5PP in the paper's comparison.
//
// Slots. Every core sees its possible neighbours through ten slots, one per
// index offset -5..-1 (slots 0..4) and +1..+5 (slots 5..9). Slot 10 stands
// for the array's external port. Slot numbering and all the configuration
// types below are this design's own choice.
package pp5_pkg;

  localparam int unsigned N_SLOTS  = 10;  // offsets -5..-1, +1..+5
  localparam int unsigned SLOT_EXT = 10;  // external stream (array input)
  localparam int unsigned ACC_BITS = 32;  // crossbar column result width

  // Offset (t - s) of the neighbour behind slot k.
  function automatic int slot_offset(int k);
    return (k < 5) ? k - 5 : k - 4;
  endfunction

  // Slot through which a core sees the neighbour at offset d (d != 0).
  function automatic int offset_slot(int d);
    return (d < 0) ? d + 5 : d + 4;
  endfunction

  // 5PP adjacency between core indices s and t in an array of n cores.
  function automatic bit pp5_adjacent(int s, int t, int n);
    int lo, d;
    if (s == t || s < 0 || t < 0 || s >= n || t >= n) return 1'b0;
    lo = (s < t) ? s : t;
    d  = (s < t) ? t - s : s - t;
    return (d <= 4) || (d == 5 && (lo % 2) == 0);
  endfunction

  // Number of undirected 5PP edges among n cores.
  function automatic int pp5_edges(int n);
    int e = 0;
    for (int s = 0; s < n; s++)
      for (int t = s + 1; t < n && t <= s + 5; t++)
        if (pp5_adjacent(s, t, n)) e++;
    return e;
  endfunction

  // Per-core layer configuration, written once before inference.
  typedef struct packed {
    logic [9:0] c_in;          // input channels (1..C_MAX)
    logic [9:0] c_out;         // output channels (1..C_MAX)
    logic       k3;            // 1: 3x3 kernel, zero padding 1; 0: 1x1 kernel
    logic       stride2;       // 1: stride 2; 0: stride 1
    logic [7:0] h;             // input feature-map height
    logic [7:0] w;             // input feature-map width
    logic       gpool;         // global average pooling before the layer
    logic       res_en;        // add a residual pixel to every result
    logic       relu_en;       // apply ReLU after scaling and residual
    logic [4:0] shift;         // right shift after per-channel scaling
    logic [3:0] in_sel;        // slot of the feedforward input (10: external)
    logic [3:0] res_sel;       // slot of the residual input
    logic [9:0] out_ff_mask;   // results go to these slots' input memories
    logic [9:0] out_res_mask;  // results go to these slots' output memories
    logic       out_ext;       // results also go to the array output
    logic [9:0] fwd_mask;      // received inputs are forwarded as residuals
  } layer_cfg_t;

  typedef enum logic [1:0] {
    PRG_WEIGHT = 2'd0,  // crossbar device at (row, col) <= data[7:0]
    PRG_SCALE  = 2'd1,  // scale of output channel col <= data[15:0]
    PRG_BIAS   = 2'd2,  // bias of output channel col <= data
    PRG_LAYER  = 2'd3   // layer configuration <= layer
  } prg_target_e;

  // One programming write, addressed to one core.
  typedef struct packed {
    logic [7:0]  core;
    prg_target_e target;
    logic [9:0]  row;
    logic [9:0]  col;
    logic [31:0] data;
    layer_cfg_t  layer;
  } prg_t;

endpackage
