// tb_output_memory: checks the result and residual queues of the output
// memory.
//
// Both queues get random pushes and pops for 5000 clocks. Every popped pixel
// is compared with a queue model kept here, and the reported counts with the
// model's size. The residual queue is filled completely once: it must then
// refuse further pixels (ready low) at exactly RES_DEPTH entries.
module tb_output_memory;
  localparam int C = 4, OD = 4, RD = 20;
  logic clk = 0, rst_n = 0;
  logic act_in_valid = 0, act_in_ready, act_out_valid, act_out_ready = 0;
  logic res_in_valid = 0, res_in_ready, res_out_valid, res_out_ready = 0;
  logic [C-1:0][7:0] act_in = '0, act_out, res_in = '0, res_out;
  logic [$clog2(OD+1)-1:0] act_count;
  logic [$clog2(RD+1)-1:0] res_count;
  int checks = 0, failures = 0, full_seen = 0;

  output_memory #(.C_MAX(C), .ACT_BITS(8), .MAX_W(1), .OUT_DEPTH(OD), .RES_DEPTH(RD)) dut (.*);

  always #5 clk = ~clk;

  logic [C*8-1:0] qa[$], qr[$];

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      checks += 2;
      if (int'(act_count) != qa.size()) begin failures++; $display("act_count %0d vs %0d", act_count, qa.size()); end
      if (int'(res_count) != qr.size()) begin failures++; $display("res_count %0d vs %0d", res_count, qr.size()); end
      act_in_valid  = $urandom % 2; act_in = {$urandom};
      act_out_ready = $urandom % 2;
      // fill the residual queue during clocks 1000..1100
      res_in_valid  = (i >= 1000 && i < 1100) ? 1'b1 : ($urandom % 2);
      res_out_ready = (i >= 1000 && i < 1100) ? 1'b0 : ($urandom % 2);
      res_in = {$urandom};
      if (qr.size() == RD) begin
        full_seen++;
        checks++;
        if (res_in_ready) begin failures++; $display("full residual queue still ready"); end
      end
      @(posedge clk);
      if (act_out_valid && act_out_ready) begin
        checks++;
        if (qa.size() == 0 || act_out != qa[0]) begin failures++; $display("act data mismatch"); end
        if (qa.size()) void'(qa.pop_front());
      end
      if (res_out_valid && res_out_ready) begin
        checks++;
        if (qr.size() == 0 || res_out != qr[0]) begin failures++; $display("res data mismatch"); end
        if (qr.size()) void'(qr.pop_front());
      end
      if (act_in_valid && act_in_ready) qa.push_back(act_in);
      if (res_in_valid && res_in_ready) qr.push_back(res_in);
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("residual queue never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
