// cm_crossbar: behavioural model of the memristive crossbar of a CM core.
//
// This is a behavioural model, not synthesizable logic. The real part is an
// analog array of memristive devices. Each device holds one convolution
// weight as a conductance. Driving the rows with the input activations makes
// every column current the dot product of the inputs with that column's
// weights (Ohm's and Kirchhoff's laws). The whole vector-matrix product of up
// to ROWS x COLS = 576 x 576 is done in one computational cycle. The paper
// gives that size and the one-cycle timing. This model reproduces the ideal,
// noise-free product in integer arithmetic: signed WEIGHT_BITS weights times
// signed ACT_BITS activations, exact ACC_BITS column sums.
//
// Interface. Weights are written one device at a time through prg_we, row,
// col, wdata. A product starts when start is high. n_rows and n_cols give
// the used part of the array, so unused rows and columns cost no simulation
// time; columns at or above n_cols read 0. The result is on y one clock after
// start, with y_valid high for that one cycle (the computational cycle is one
// clock). Weight width, the partial-array inputs and the output format are
// this model's choices. The paper leaves device precision and the ADC open.
module cm_crossbar #(
  parameter int unsigned ROWS        = 576,
  parameter int unsigned COLS        = 576,
  parameter int unsigned ACT_BITS    = 8,
  parameter int unsigned WEIGHT_BITS = 8
) (
  input  logic                                   clk,
  input  logic                                   prg_we,
  input  logic [$clog2(ROWS)-1:0]                prg_row,
  input  logic [$clog2(COLS)-1:0]                prg_col,
  input  logic signed [WEIGHT_BITS-1:0]          prg_wdata,
  input  logic                                   start,
  input  logic [ROWS-1:0][ACT_BITS-1:0]          x,
  input  logic [$clog2(ROWS+1)-1:0]              n_rows,
  input  logic [$clog2(COLS+1)-1:0]              n_cols,
  output logic signed [COLS-1:0][pp5_pkg::ACC_BITS-1:0] y,
  output logic                                   y_valid
);
  import pp5_pkg::ACC_BITS;

  logic signed [WEIGHT_BITS-1:0] g [ROWS][COLS];  // device conductances

  // Column current of column c for the present row drive.
  function automatic logic signed [ACC_BITS-1:0] column(int c);
    logic signed [ACC_BITS-1:0] acc = '0;
    for (int r = 0; r < int'(n_rows); r++)
      acc += ACC_BITS'($signed(x[r]) * g[r][c]);
    return acc;
  endfunction

  always_ff @(posedge clk) begin
    if (prg_we) g[prg_row][prg_col] <= prg_wdata;
  end

  always_ff @(posedge clk) begin
    y_valid <= start;
    if (start)
      for (int c = 0; c < int'(COLS); c++)
        y[c] <= (c < int'(n_cols)) ? column(c) : '0;
  end

endmodule
