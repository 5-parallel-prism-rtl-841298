// tb_digital_processor: checks the per-channel post-processing.
//
// Applies 3000 random sets of crossbar sums, scales, biases, shifts,
// residuals and mode bits. Each output channel is compared with a
// reference computed here in 64-bit integers: scale, add bias, arithmetic
// shift, optional residual, optional ReLU, saturation to [-128, 127], and 0
// for channels at or above c_out. Directed cases cover saturation at both
// ends and ReLU of a negative value.
module tb_digital_processor;
  localparam int C = 8;
  logic signed [C-1:0][31:0] acc;
  logic signed [C-1:0][15:0] scale;
  logic signed [C-1:0][31:0] bias;
  logic [4:0] shift;
  logic res_en, relu_en;
  logic [9:0] c_out;
  logic [C-1:0][7:0] residual, act;
  int checks = 0, failures = 0, sat_hi = 0, sat_lo = 0, relu_hits = 0;

  digital_processor #(.C_MAX(C), .ACT_BITS(8), .SCALE_BITS(16)) dut (.*);

  task automatic check_all();
    #1;
    for (int ch = 0; ch < C; ch++) begin
      longint v;
      v = (longint'($signed(acc[ch])) * longint'($signed(scale[ch])) + longint'($signed(bias[ch]))) >>> shift;
      if (res_en) v += longint'($signed(residual[ch]));
      if (relu_en && v < 0) begin v = 0; relu_hits++; end
      if (v > 127) begin v = 127; sat_hi++; end
      if (v < -128) begin v = -128; sat_lo++; end
      if (ch >= int'(c_out)) v = 0;
      checks++;
      if (longint'($signed(act[ch])) != v) begin
        failures++;
        if (failures < 10) $display("ch %0d: %0d expected %0d", ch, $signed(act[ch]), v);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 3000; i++) begin
      for (int ch = 0; ch < C; ch++) begin
        acc[ch]      = 32'($signed($urandom % 40000) - 20000);
        scale[ch]    = 16'($urandom);
        bias[ch]     = 32'($signed($urandom % 2000000) - 1000000);
        residual[ch] = 8'($urandom);
      end
      shift   = 5'($urandom % 24);
      res_en  = 1'($urandom);
      relu_en = 1'($urandom);
      c_out   = 10'($urandom % (C + 1));
      check_all();
    end
    // directed: saturation and ReLU
    acc = '0; bias = '0; residual = '0; shift = 0; res_en = 0; c_out = 10'(C);
    for (int ch = 0; ch < C; ch++) begin acc[ch] = 1000; scale[ch] = (ch % 2) ? -16'sd1 : 16'sd1; end
    relu_en = 0; check_all();
    relu_en = 1; check_all();
    checks++;
    if (sat_hi == 0 || sat_lo == 0 || relu_hits == 0) begin
      failures++; $display("saturation/ReLU cases not reached");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
