// pp5_array: an array of computational-memory (CM) cores connected as a
// 5 Parallel Prism (5PP). It runs a convolutional network as a pipeline with
// one layer per core.
//
// Each core holds the weights of one layer in its crossbar and computes one
// output pixel (all channels) per convolution. Activations flow from core to
// core over the 5PP fabric as soon as they are computed, so all layers work
// at once on different parts of the image. The paper shows that the layer
// graph of feedforward, ResNet, DenseNet and Inception networks maps onto
// 5PP such that every layer-to-layer transfer is one hop between
// neighbouring cores. A core then never waits for a multi-hop transfer.
// Which core runs which layer, and where its results go, is set per core by
// the layer configuration (pp5_pkg::layer_cfg_t). That is the "H-colouring"
// of the network onto the array.
//
// Defaults follow the paper's ResNet-32 case study: 40 cores (a 4-by-10
// array), 576x576 crossbars, 8-bit activations, up to 64 channels on a
// 32x32 map.
//
// Interface:
//  * prg_valid / prg: one programming word per clock, delivered to the core
//    prg.core. Program all cores before streaming data.
//  * in_*: the input image, one pixel (all channels) per transfer, raster
//    order. It goes to every core whose in_sel is the external slot.
//  * out_*: results of the core(s) with out_ext set. Exactly one core may set
//    out_ext.
// The physical serial links are represented by their digital ends
// (pp5_link). There are no other external connections.
module pp5_array #(
  parameter int unsigned N_CORES   = 40,
  parameter int unsigned C_MAX     = 64,
  parameter int unsigned ACT_BITS  = 8,
  parameter int unsigned MAX_W     = 32,
  parameter int unsigned MAX_H     = 32,
  parameter int unsigned XBAR_ROWS = 576,
  parameter int unsigned XBAR_COLS = 576
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               prg_valid,
  input  pp5_pkg::prg_t                      prg,
  input  logic                               in_valid,
  output logic                               in_ready,
  input  logic [C_MAX-1:0][ACT_BITS-1:0]     in_data,
  output logic                               out_valid,
  input  logic                               out_ready,
  output logic [C_MAX-1:0][ACT_BITS-1:0]     out_data
);
  import pp5_pkg::*;

  typedef logic [C_MAX-1:0][ACT_BITS-1:0] pixel_t;

  logic [N_CORES-1:0][9:0]         ff_tx_valid, ff_tx_ready, res_tx_valid, res_tx_ready;
  logic [N_CORES-1:0][9:0]         ff_rx_valid, ff_rx_ready, res_rx_valid, res_rx_ready;
  logic [N_CORES-1:0][9:0][C_MAX-1:0][ACT_BITS-1:0] ff_tx_data, res_tx_data, ff_rx_data, res_rx_data;
  logic [N_CORES-1:0]              ext_in_ready, ext_out_valid;
  pixel_t [N_CORES-1:0]            ext_out_data;

  for (genvar s = 0; s < int'(N_CORES); s++) begin : g_core
    cm_core #(.C_MAX(C_MAX), .ACT_BITS(ACT_BITS), .MAX_W(MAX_W), .MAX_H(MAX_H),
              .XBAR_ROWS(XBAR_ROWS), .XBAR_COLS(XBAR_COLS)) u_core (
      .clk, .rst_n,
      .prg_we       (prg_valid && 32'(prg.core) == s),
      .prg,
      .cfg_o        (),
      .ext_in_valid (in_valid),
      .ext_in_ready (ext_in_ready[s]),
      .ext_in_data  (in_data),
      .ext_out_valid(ext_out_valid[s]),
      .ext_out_ready(out_ready),
      .ext_out_data (ext_out_data[s]),
      .ff_in_valid  (ff_rx_valid[s]),  .ff_in_ready (ff_rx_ready[s]),  .ff_in_data (ff_rx_data[s]),
      .res_in_valid (res_rx_valid[s]), .res_in_ready(res_rx_ready[s]), .res_in_data(res_rx_data[s]),
      .ff_out_valid (ff_tx_valid[s]),  .ff_out_ready(ff_tx_ready[s]),  .ff_out_data(ff_tx_data[s]),
      .res_out_valid(res_tx_valid[s]), .res_out_ready(res_tx_ready[s]), .res_out_data(res_tx_data[s])
    );
  end

  pp5_fabric #(.N_CORES(N_CORES), .C_MAX(C_MAX), .ACT_BITS(ACT_BITS)) u_fabric (
    .clk, .rst_n,
    .ff_tx_valid, .ff_tx_ready, .ff_tx_data,
    .res_tx_valid, .res_tx_ready, .res_tx_data,
    .ff_rx_valid, .ff_rx_ready, .ff_rx_data,
    .res_rx_valid, .res_rx_ready, .res_rx_data
  );

  assign in_ready = |ext_in_ready;

  always_comb begin
    out_valid = 1'b0;
    out_data  = '0;
    for (int s = 0; s < int'(N_CORES); s++)
      if (ext_out_valid[s]) begin
        out_valid = 1'b1;
        out_data  = ext_out_data[s];
      end
  end

  a_one_output : assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(ext_out_valid));

endmodule
