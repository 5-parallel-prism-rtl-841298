// cm_core: one computational-memory (CM) core. It executes one CNN layer in
// the pipeline.
//
// Structure (following the paper's case study): input memory -> crossbar ->
// digital processor -> output memory. The input memory gathers the pixel
// neighbourhood of the next convolution. The memristive crossbar computes
// the product of that window with the layer's weights in one cycle. The
// digital processor scales the result, adds the residual and applies the
// activation function. The output memory holds the result until the links
// have taken it, and holds residual pixels that arrive early.
//
// Links. The core talks to up to ten 5PP neighbours through slots 0..9
// (index offsets -5..-1, +1..+5, see pp5_pkg). Each slot has a feedforward
// (ff) and a residual (res) channel in each direction. The layer
// configuration chooses:
//  * in_sel: the one slot (or slot 10, the external input) whose ff
//    channel feeds the input memory;
//  * res_sel: the slot whose res channel feeds the residual queue;
//  * out_ff_mask / out_res_mask / out_ext: where each result is sent. A
//    result goes to all marked destinations at once, so one result can feed
//    a layer and a resampling layer. It leaves only when all of them are
//    ready;
//  * fwd_mask: slots whose res channel gets a copy of every accepted input
//    pixel. That is the paper's way of realising a ResNet shortcut. The
//    input of layer l-1 (the output of layer l-2) is passed on to the
//    output memory of layer l, so the shortcut shares the link of the
//    feedforward edge. A slot marked in fwd_mask sends only forwarded
//    pixels on its res channel.
// Only one ff source per core is supported: concatenation of several
// sources (DenseNet, Inception) is not built.
//
// Crossbar rows: window tap t, input channel c drives row t*c_in + c. The
// row order is this design's choice, and weights must be written to match.
//
// Programming. prg_we with a prg_t word writes one crossbar device, one
// channel's scale or bias, or the layer configuration. The array sends each
// word only to the core it addresses.
//
// Timing. One window enters the crossbar per clock while the result queue
// has room and, with res_en, a residual is waiting. The result is written
// into the result queue one clock later. A result can leave on the links
// the clock after that. The pipeline stalls when any of these waits.
module cm_core #(
  parameter int unsigned C_MAX      = 64,
  parameter int unsigned ACT_BITS   = 8,
  parameter int unsigned MAX_W      = 32,
  parameter int unsigned MAX_H      = 32,
  parameter int unsigned XBAR_ROWS  = 576,
  parameter int unsigned XBAR_COLS  = 576,
  parameter int unsigned RES_DEPTH  = 4 * MAX_W + 16
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  // programming
  input  logic                                       prg_we,
  input  pp5_pkg::prg_t                              prg,
  output pp5_pkg::layer_cfg_t                        cfg_o,
  // external feedforward input (slot 10)
  input  logic                                       ext_in_valid,
  output logic                                       ext_in_ready,
  input  logic [C_MAX-1:0][ACT_BITS-1:0]             ext_in_data,
  // external result output
  output logic                                       ext_out_valid,
  input  logic                                       ext_out_ready,
  output logic [C_MAX-1:0][ACT_BITS-1:0]             ext_out_data,
  // link channels, indexed by slot
  input  logic [9:0]                                 ff_in_valid,
  output logic [9:0]                                 ff_in_ready,
  input  logic [9:0][C_MAX-1:0][ACT_BITS-1:0]        ff_in_data,
  input  logic [9:0]                                 res_in_valid,
  output logic [9:0]                                 res_in_ready,
  input  logic [9:0][C_MAX-1:0][ACT_BITS-1:0]        res_in_data,
  output logic [9:0]                                 ff_out_valid,
  input  logic [9:0]                                 ff_out_ready,
  output logic [9:0][C_MAX-1:0][ACT_BITS-1:0]        ff_out_data,
  output logic [9:0]                                 res_out_valid,
  input  logic [9:0]                                 res_out_ready,
  output logic [9:0][C_MAX-1:0][ACT_BITS-1:0]        res_out_data
);
  import pp5_pkg::*;

  localparam int unsigned SCALE_BITS = 16;
  typedef logic [C_MAX-1:0][ACT_BITS-1:0] pixel_t;

  // ---------------------------------------------------------------- config
  layer_cfg_t                           cfg;
  logic signed [C_MAX-1:0][SCALE_BITS-1:0] scale;
  logic signed [C_MAX-1:0][31:0]        bias;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg   <= '0;
      scale <= '0;
      bias  <= '0;
    end else if (prg_we) begin
      unique case (prg.target)
        PRG_LAYER: cfg <= prg.layer;
        PRG_SCALE: if (32'(prg.col) < C_MAX) scale[prg.col] <= prg.data[SCALE_BITS-1:0];
        PRG_BIAS:  if (32'(prg.col) < C_MAX) bias[prg.col]  <= prg.data;
        default: ;
      endcase
    end
  end
  assign cfg_o = cfg;

  // ------------------------------------------------ feedforward input select
  logic   in_valid, in_ready, imem_ready, fwd_ready;
  pixel_t in_data;

  always_comb begin
    in_valid = 1'b0;
    in_data  = '0;
    if (cfg.in_sel == 4'(SLOT_EXT)) begin
      in_valid = ext_in_valid;
      in_data  = ext_in_data;
    end else begin
      for (int k = 0; k < int'(N_SLOTS); k++)
        if (cfg.in_sel == 4'(k)) begin
          in_valid = ff_in_valid[k];
          in_data  = ff_in_data[k];
        end
    end
  end

  // An input pixel is taken when the input memory and every forwarding
  // destination can take it.
  assign fwd_ready = &(res_out_ready | ~cfg.fwd_mask);
  assign in_ready  = imem_ready && fwd_ready;

  always_comb begin
    ext_in_ready = (cfg.in_sel == 4'(SLOT_EXT)) && in_ready;
    for (int k = 0; k < int'(N_SLOTS); k++)
      ff_in_ready[k] = (cfg.in_sel == 4'(k)) && in_ready;
  end

  // ------------------------------------------------------------ input memory
  logic                             win_valid, win_ready, win_last;
  logic [8:0][C_MAX-1:0][ACT_BITS-1:0] win;

  input_memory #(.C_MAX(C_MAX), .ACT_BITS(ACT_BITS), .MAX_W(MAX_W), .MAX_H(MAX_H)) u_imem (
    .clk, .rst_n, .cfg,
    .in_valid (in_valid && fwd_ready), .in_ready(imem_ready), .in_data(in_data),
    .win_valid, .win_ready, .win, .win_last
  );

  // ---------------------------------------------------------------- crossbar
  logic [XBAR_ROWS-1:0][ACT_BITS-1:0]            xrow;
  logic signed [XBAR_COLS-1:0][ACC_BITS-1:0]     ycol;
  logic                                          y_valid, start;
  logic [$clog2(XBAR_ROWS+1)-1:0]                n_rows;
  int                                            taps;

  assign taps   = cfg.k3 && !cfg.gpool ? 9 : 1;
  assign n_rows = ($clog2(XBAR_ROWS+1))'(taps * int'(cfg.c_in));

  always_comb begin
    xrow = '0;
    for (int t = 0; t < 9; t++)
      for (int c = 0; c < int'(C_MAX); c++)
        if (t < taps && c < int'(cfg.c_in) && t * int'(cfg.c_in) + c < int'(XBAR_ROWS))
          xrow[t * int'(cfg.c_in) + c] = win[t][c];
  end

  cm_crossbar #(.ROWS(XBAR_ROWS), .COLS(XBAR_COLS), .ACT_BITS(ACT_BITS)) u_xbar (
    .clk,
    .prg_we   (prg_we && prg.target == PRG_WEIGHT),
    .prg_row  (prg.row[$clog2(XBAR_ROWS)-1:0]),
    .prg_col  (prg.col[$clog2(XBAR_COLS)-1:0]),
    .prg_wdata(prg.data[7:0]),
    .start,
    .x        (xrow),
    .n_rows,
    .n_cols   (($clog2(XBAR_COLS+1))'(cfg.c_out)),
    .y        (ycol),
    .y_valid
  );

  // ------------------------------------------------------- output memory
  logic                                 act_in_ready, act_out_valid, act_out_ready;
  logic                                 res_q_valid, res_pop;
  pixel_t                               act, act_out, res_q;
  logic [$clog2(5)-1:0]                 act_count;
  logic [$clog2(RES_DEPTH+1)-1:0]       res_count;
  logic                                 res_link_valid;
  pixel_t                               res_link_data;

  // Issue: room for the result (counting the one in flight) and, if needed,
  // a residual not yet claimed by the product in flight.
  assign start     = win_valid
                  && (32'(act_count) + 32'(y_valid) < 4)
                  && (!cfg.res_en || (32'(res_count) > 32'(y_valid)));
  assign win_ready = start;
  assign res_pop   = y_valid && cfg.res_en;

  logic signed [C_MAX-1:0][ACC_BITS-1:0] acc;
  always_comb
    for (int c = 0; c < int'(C_MAX); c++) acc[c] = ycol[c];

  digital_processor #(.C_MAX(C_MAX), .ACT_BITS(ACT_BITS), .SCALE_BITS(SCALE_BITS)) u_dp (
    .acc, .scale, .bias, .shift(cfg.shift), .res_en(cfg.res_en), .relu_en(cfg.relu_en),
    .c_out(cfg.c_out), .residual(res_q), .act
  );

  always_comb begin
    res_link_valid = 1'b0;
    res_link_data  = '0;
    for (int k = 0; k < int'(N_SLOTS); k++)
      if (cfg.res_sel == 4'(k)) begin
        res_link_valid = res_in_valid[k];
        res_link_data  = res_in_data[k];
      end
  end

  logic res_link_ready;
  always_comb
    for (int k = 0; k < int'(N_SLOTS); k++)
      res_in_ready[k] = (cfg.res_sel == 4'(k)) && res_link_ready;

  output_memory #(.C_MAX(C_MAX), .ACT_BITS(ACT_BITS), .MAX_W(MAX_W), .OUT_DEPTH(4),
                  .RES_DEPTH(RES_DEPTH)) u_omem (
    .clk, .rst_n,
    .act_in_valid (y_valid), .act_in_ready(act_in_ready), .act_in(act),
    .act_out_valid, .act_out_ready, .act_out, .act_count,
    .res_in_valid (res_link_valid), .res_in_ready(res_link_ready), .res_in(res_link_data),
    .res_out_valid(res_q_valid), .res_out_ready(res_pop), .res_out(res_q),
    .res_count
  );

  // ------------------------------------------------------ result multicast
  logic all_ready;
  assign all_ready = &(ff_out_ready  | ~cfg.out_ff_mask)
                  && &(res_out_ready | ~(cfg.out_res_mask & ~cfg.fwd_mask))
                  && (ext_out_ready  || !cfg.out_ext);
  assign act_out_ready = all_ready;

  always_comb begin
    for (int k = 0; k < int'(N_SLOTS); k++) begin
      ff_out_valid[k] = act_out_valid && all_ready && cfg.out_ff_mask[k];
      ff_out_data[k]  = act_out;
      if (cfg.fwd_mask[k]) begin
        res_out_valid[k] = in_valid && imem_ready && fwd_ready;
        res_out_data[k]  = in_data;
      end else begin
        res_out_valid[k] = act_out_valid && all_ready && cfg.out_res_mask[k];
        res_out_data[k]  = act_out;
      end
    end
    ext_out_valid = act_out_valid && all_ready && cfg.out_ext;
    ext_out_data  = act_out;
  end

  // The result queue never overflows and a residual is there when needed.
  a_result_room : assert property (@(posedge clk) disable iff (!rst_n)
    y_valid |-> act_in_ready);
  a_residual_present : assert property (@(posedge clk) disable iff (!rst_n)
    res_pop |-> res_q_valid);

endmodule
