// pp5_link: digital end of one directed channel of a 5PP link.
//
// Each edge of the 5PP topology is a bidirectional link. Each direction has
// two channels: one into the neighbour's input memory (feedforward
// activations) and one into its output memory (residual activations). The
// separate channels follow the paper. Every channel is one instance of this
// module. It moves one pixel per clock: all C_MAX channels of one activation,
// ACT_BITS each. At the paper's numbers (64 channels x 8 bits per 100 ns
// computational cycle) that is 5.1 Gb/s, the per-channel bandwidth the paper
// estimates for the ResNet-32 case study. The serial transceiver itself is not
// modelled.
//
// Implementation (this design's choice): a two-entry skid buffer. in_ready and
// out_valid come straight from flops, so chained links and cores form no
// combinational path. It sustains one transfer per cycle, and a pixel takes
// one cycle to cross. Handshake: a word moves when valid && ready. The sender
// must hold valid and data stable until the word is accepted.
module pp5_link #(
  parameter int unsigned C_MAX    = 64,
  parameter int unsigned ACT_BITS = 8
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  output logic                               in_ready,
  input  logic [C_MAX-1:0][ACT_BITS-1:0]     in_data,
  output logic                               out_valid,
  input  logic                               out_ready,
  output logic [C_MAX-1:0][ACT_BITS-1:0]     out_data
);

  typedef logic [C_MAX-1:0][ACT_BITS-1:0] pixel_t;

  pixel_t main_q, skid_q;
  logic   main_v, skid_v;

  assign out_valid = main_v;
  assign out_data  = main_q;
  assign in_ready  = !skid_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      main_v <= 1'b0;
      skid_v <= 1'b0;
      main_q <= '0;
      skid_q <= '0;
    end else begin
      if (!main_v || out_ready) begin
        // main register frees up: refill from skid, else from input
        if (skid_v) begin
          main_q <= skid_q;
          main_v <= 1'b1;
          skid_v <= 1'b0;  // in_ready was low: no new word this cycle
        end else begin
          main_q <= in_data;
          main_v <= in_valid;
        end
      end else if (in_valid && !skid_v) begin
        // main stalled: park the incoming word
        skid_q <= in_data;
        skid_v <= 1'b1;
      end
    end
  end

  // Handshake rule on the receiving side: once offered, a word stays.
  a_out_stable : assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
