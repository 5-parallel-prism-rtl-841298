// pp5_fabric: the 5 Parallel Prism interconnect among N_CORES CM cores.
//
// The topology follows Algorithm 1 of the paper. Complete graphs K6, each a
// 2x3 neighbourhood of cores, are chained so that consecutive unit graphs
// share four cores. With cores numbered a1, b1, a2, b2, ... (pp5_pkg), cores
// s < t are neighbours when t-s <= 4, or t-s == 5 with s even. Every
// neighbour pair gets a bidirectional link. Each direction is a feedforward
// channel and a residual channel, so an edge is four pp5_link instances.
// The paper says explicitly that feedforward and residual traffic use
// separate channels. Nothing else is connected: a slot without a neighbour
// (non-adjacent offset or beyond the array's end) shows ready = 0 to its
// sender and valid = 0 to its receiver.
//
// Ports are indexed [core][slot] on the core side. The *_tx ports come from
// the cores' outputs; the *_rx ports go to the cores' inputs. Slot k of
// core s (offset d) reaches slot 9-k (offset -d) of core s+d. Timing is that
// of pp5_link: one pixel per channel per clock, one clock of latency.
module pp5_fabric #(
  parameter int unsigned N_CORES  = 40,
  parameter int unsigned C_MAX    = 64,
  parameter int unsigned ACT_BITS = 8
) (
  input  logic                                             clk,
  input  logic                                             rst_n,
  input  logic [N_CORES-1:0][9:0]                          ff_tx_valid,
  output logic [N_CORES-1:0][9:0]                          ff_tx_ready,
  input  logic [N_CORES-1:0][9:0][C_MAX-1:0][ACT_BITS-1:0] ff_tx_data,
  input  logic [N_CORES-1:0][9:0]                          res_tx_valid,
  output logic [N_CORES-1:0][9:0]                          res_tx_ready,
  input  logic [N_CORES-1:0][9:0][C_MAX-1:0][ACT_BITS-1:0] res_tx_data,
  output logic [N_CORES-1:0][9:0]                          ff_rx_valid,
  input  logic [N_CORES-1:0][9:0]                          ff_rx_ready,
  output logic [N_CORES-1:0][9:0][C_MAX-1:0][ACT_BITS-1:0] ff_rx_data,
  output logic [N_CORES-1:0][9:0]                          res_rx_valid,
  input  logic [N_CORES-1:0][9:0]                          res_rx_ready,
  output logic [N_CORES-1:0][9:0][C_MAX-1:0][ACT_BITS-1:0] res_rx_data
);
  import pp5_pkg::*;

  for (genvar s = 0; s < int'(N_CORES); s++) begin : g_core
    for (genvar k = 0; k < 10; k++) begin : g_slot
      localparam int T = s + slot_offset(k);  // neighbour behind this slot
      if (pp5_adjacent(s, T, N_CORES)) begin : g_link
        // channels from core s, slot k to core T, slot 9-k
        pp5_link #(.C_MAX(C_MAX), .ACT_BITS(ACT_BITS)) u_ff (
          .clk, .rst_n,
          .in_valid (ff_tx_valid[s][k]),   .in_ready (ff_tx_ready[s][k]),
          .in_data  (ff_tx_data[s][k]),
          .out_valid(ff_rx_valid[T][9-k]), .out_ready(ff_rx_ready[T][9-k]),
          .out_data (ff_rx_data[T][9-k])
        );
        pp5_link #(.C_MAX(C_MAX), .ACT_BITS(ACT_BITS)) u_res (
          .clk, .rst_n,
          .in_valid (res_tx_valid[s][k]),   .in_ready (res_tx_ready[s][k]),
          .in_data  (res_tx_data[s][k]),
          .out_valid(res_rx_valid[T][9-k]), .out_ready(res_rx_ready[T][9-k]),
          .out_data (res_rx_data[T][9-k])
        );
      end else begin : g_open
        // no neighbour: this slot never sends nor receives (adjacency is
        // symmetric, so no link drives receive slot k of core s either)
        assign ff_tx_ready[s][k]  = 1'b0;
        assign res_tx_ready[s][k] = 1'b0;
        assign ff_rx_valid[s][k]  = 1'b0;
        assign ff_rx_data[s][k]   = '0;
        assign res_rx_valid[s][k] = 1'b0;
        assign res_rx_data[s][k]  = '0;
      end
    end
  end

endmodule
