// tb_cm_crossbar: checks the crossbar model's vector-matrix product.
//
// Programs all 576 x 576 devices with random signed 8-bit weights, kept
// also in a local copy. Then runs products with random signed 8-bit inputs:
// the full array, and partial arrays (fewer rows and columns). Each column
// result is compared with a dot product computed here, and unused columns
// must read 0. Timing: y_valid must rise exactly one clock after start,
// the paper's one computational cycle per product.
module tb_cm_crossbar;
  localparam int R = 576, C = 576;
  logic clk = 0;
  logic prg_we = 0;
  logic [9:0] prg_row = '0, prg_col = '0;
  logic signed [7:0] prg_wdata = '0;
  logic start = 0;
  logic [R-1:0][7:0] x = '0;
  logic [9:0] n_rows = '0, n_cols = '0;
  logic signed [C-1:0][31:0] y;
  logic y_valid;
  int checks = 0, failures = 0;
  byte w [R][C];

  cm_crossbar #(.ROWS(R), .COLS(C)) dut (.*);

  always #5 clk = ~clk;

  task automatic product(int nr, int nc);
    longint ref_v;
    @(negedge clk);
    for (int r = 0; r < R; r++) x[r] = 8'($urandom);
    n_rows = 10'(nr); n_cols = 10'(nc);
    start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (!y_valid) begin failures++; $display("y_valid not one clock after start"); end
    for (int c = 0; c < C; c++) begin
      ref_v = 0;
      if (c < nc) for (int r = 0; r < nr; r++) ref_v += longint'($signed(x[r])) * longint'(w[r][c]);
      checks++;
      if (longint'($signed(y[c])) != ref_v) begin
        failures++;
        if (failures < 10) $display("col %0d: %0d expected %0d", c, $signed(y[c]), ref_v);
      end
    end
    @(negedge clk);
    checks++;
    if (y_valid) begin failures++; $display("y_valid longer than one clock"); end
  endtask

  initial begin
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        w[r][c] = byte'($urandom);
        prg_we = 1; prg_row = 10'(r); prg_col = 10'(c); prg_wdata = w[r][c];
      end
    @(negedge clk); prg_we = 0;
    product(R, C);
    product(R, C);
    product(144, 16);
    product(288, 32);
    product(1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
