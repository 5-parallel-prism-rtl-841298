// sync_fifo: synchronous first-in first-out buffer used by the output memory.
//
// DEPTH words of WIDTH bits in a circular array with separate read and write
// pointers and an occupancy count. push when in_valid && in_ready, pop when
// out_valid && out_ready. in_ready and out_valid depend only on the stored
// count, never on the other side's signals. A word pushed is visible at the
// head on the next clock. Full throughput: a push and a pop may happen in
// the same cycle, also when full.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [WIDTH-1:0]            in_data,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [WIDTH-1:0]            out_data,
  output logic [$clog2(DEPTH+1)-1:0]  count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rp, wp;
  logic             push, pop;

  assign in_ready  = (32'(count) < DEPTH);
  assign out_valid = (count != 0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] nxt(logic [AW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp    <= '0;
      wp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= nxt(wp);
      if (pop)  rp <= nxt(rp);
      count <= count + ($bits(count))'(push) - ($bits(count))'(pop);
    end
  end

  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n)
    32'(count) <= DEPTH);

endmodule
