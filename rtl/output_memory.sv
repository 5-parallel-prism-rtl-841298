// output_memory: output memory of a CM core.
//
// The paper's output memory holds the result of the convolution: one
// activation across the entire channel depth. The links can also write into
// it directly. That is how residual activations reach the core that adds
// them, while the feedforward activations go to the input memory. Two
// queues implement this (the split into two FIFOs is this design's choice):
//  * the result queue (OUT_DEPTH pixels): results wait here until every
//    destination link has taken them;
//  * the residual queue (RES_DEPTH pixels): residual pixels from the
//    residual channel wait here until the digital processor adds them to the
//    result at the same position.
// The residual activations leave their source about two layer latencies
// before the matching result, so RES_DEPTH must cover the pixels of two line
// buffers, 2*(2*MAX_W+3). Its default, 4*MAX_W+16, adds margin.
//
// Timing: both queues are sync_fifo instances. A pixel written is readable
// the next clock.
module output_memory #(
  parameter int unsigned C_MAX     = 64,
  parameter int unsigned ACT_BITS  = 8,
  parameter int unsigned MAX_W     = 32,
  parameter int unsigned OUT_DEPTH = 4,
  parameter int unsigned RES_DEPTH = 4 * MAX_W + 16
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // results from the digital processor
  input  logic                               act_in_valid,
  output logic                               act_in_ready,
  input  logic [C_MAX-1:0][ACT_BITS-1:0]     act_in,
  output logic                               act_out_valid,
  input  logic                               act_out_ready,
  output logic [C_MAX-1:0][ACT_BITS-1:0]     act_out,
  output logic [$clog2(OUT_DEPTH+1)-1:0]     act_count,
  // residuals from the residual channel
  input  logic                               res_in_valid,
  output logic                               res_in_ready,
  input  logic [C_MAX-1:0][ACT_BITS-1:0]     res_in,
  output logic                               res_out_valid,
  input  logic                               res_out_ready,
  output logic [C_MAX-1:0][ACT_BITS-1:0]     res_out,
  output logic [$clog2(RES_DEPTH+1)-1:0]     res_count
);

  sync_fifo #(.WIDTH(C_MAX * ACT_BITS), .DEPTH(OUT_DEPTH)) u_act (
    .clk, .rst_n,
    .in_valid (act_in_valid),  .in_ready (act_in_ready),  .in_data (act_in),
    .out_valid(act_out_valid), .out_ready(act_out_ready), .out_data(act_out),
    .count    (act_count)
  );

  sync_fifo #(.WIDTH(C_MAX * ACT_BITS), .DEPTH(RES_DEPTH)) u_res (
    .clk, .rst_n,
    .in_valid (res_in_valid),  .in_ready (res_in_ready),  .in_data (res_in),
    .out_valid(res_out_valid), .out_ready(res_out_ready), .out_data(res_out),
    .count    (res_count)
  );

endmodule
