// digital_processor: the digital post-processing of a CM core.
//
// The paper gives each core "modest digital processing capability" after the
// crossbar: scaling the crossbar outputs (e.g. batch normalisation),
// activation functions and residual addition. This block does those per
// output channel, in this order:
//   v = ((acc * scale + bias) >>> shift) + (res_en ? residual : 0)
//   v = relu_en ? max(v, 0) : v
//   out = v saturated to a signed ACT_BITS activation
// The paper gives 8-bit activations. The fixed-point format, the order
// (ReLU after the residual sum, as in ResNet) and saturation are this
// design's choices. Channels at or above c_out are forced to 0.
//
// Timing: purely combinational. The core registers the result into its
// output memory in the cycle the crossbar result is valid.
module digital_processor #(
  parameter int unsigned C_MAX      = 64,
  parameter int unsigned ACT_BITS   = 8,
  parameter int unsigned SCALE_BITS = 16
) (
  input  logic signed [C_MAX-1:0][pp5_pkg::ACC_BITS-1:0] acc,
  input  logic signed [C_MAX-1:0][SCALE_BITS-1:0]        scale,
  input  logic signed [C_MAX-1:0][31:0]                  bias,
  input  logic [4:0]                                     shift,
  input  logic                                           res_en,
  input  logic                                           relu_en,
  input  logic [9:0]                                     c_out,
  input  logic [C_MAX-1:0][ACT_BITS-1:0]                 residual,
  output logic [C_MAX-1:0][ACT_BITS-1:0]                 act
);
  import pp5_pkg::ACC_BITS;

  localparam int unsigned VW = ACC_BITS + SCALE_BITS + 2;
  localparam logic signed [VW-1:0] AMAX = VW'((1 << (ACT_BITS - 1)) - 1);
  localparam logic signed [VW-1:0] AMIN = -VW'(1 << (ACT_BITS - 1));

  logic signed [VW-1:0] v [C_MAX];

  always_comb begin
    for (int ch = 0; ch < int'(C_MAX); ch++) begin
      v[ch] = (VW'($signed(acc[ch])) * VW'($signed(scale[ch])) + VW'($signed(bias[ch]))) >>> shift;
      if (res_en) v[ch] = v[ch] + VW'($signed(residual[ch]));
      if (relu_en && v[ch] < 0) v[ch] = '0;
      if (v[ch] > AMAX) v[ch] = AMAX;
      if (v[ch] < AMIN) v[ch] = AMIN;
      act[ch] = (ch < int'(c_out)) ? v[ch][ACT_BITS-1:0] : '0;
    end
  end

endmodule
