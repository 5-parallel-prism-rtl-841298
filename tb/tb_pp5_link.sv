// tb_pp5_link: self-checking test of one 5PP link channel.
//
// Phase 1 sends 2000 random pixels with random gaps on the sending side and
// random back-pressure on the receiving side. It checks that every pixel
// arrives once, in order and unchanged. Phase 2 keeps the receiver always
// ready and sends 100 pixels back to back. It checks the rate (one pixel per
// clock) and the latency (a pixel sent at clock n is offered at clock n+1).
module tb_pp5_link;
  localparam int C = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [C-1:0][7:0] in_data = '0, out_data;
  int checks = 0, failures = 0;
  int cyc = 0;

  pp5_link #(.C_MAX(C), .ACT_BITS(8)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  logic [C*8-1:0] q[$];
  int tsent[$];

  task automatic run(int n, bit stream);
    int sent = 0, got = 0;
    fork
      begin : sender
        while (sent < n) begin
          @(negedge clk);
          if (!in_valid || in_ready) begin
            // previous word accepted at the last edge (or none offered)
            in_valid = stream ? 1'b1 : ($urandom % 3 != 0);
            in_data  = {$urandom, $urandom};
          end
          @(posedge clk);
          if (in_valid && in_ready) begin
            q.push_back(in_data);
            tsent.push_back(cyc);
            sent++;
            #1 in_valid = 0;
          end
        end
      end
      begin : receiver
        while (got < n) begin
          @(negedge clk);
          out_ready = stream ? 1'b1 : ($urandom % 4 != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            checks++;
            if (q.size() == 0 || out_data != q[0]) begin
              failures++;
              $display("mismatch at word %0d", got);
            end
            if (stream && tsent.size() != 0 && cyc - tsent[0] != 1) begin
              failures++;
              $display("latency %0d at word %0d", cyc - tsent[0], got);
            end
            if (q.size() != 0) begin void'(q.pop_front()); void'(tsent.pop_front()); end
            got++;
          end
        end
      end
    join
  endtask

  int t0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(2000, 1'b0);
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    t0 = cyc;
    run(100, 1'b1);
    checks++;
    if (cyc - t0 > 102) begin
      failures++;
      $display("rate: 100 words took %0d cycles", cyc - t0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
