// computation_engine: ROWS x COLS output-stationary systolic array of pe.
//
// Every cycle the engine takes one feature-map word per column (fm_in[y]) and
// one weight word with its tags per row (w_in[x], tag_in[x]). Column y is
// delayed by y cycles and row x by x cycles inside the engine, so the caller
// presents all operands of one reduction step in the same cycle; PE(x,y) then
// meets fm_in[y] and w_in[x] of the same step x+y cycles later and accumulates
// sum_t fm_in[y](t) * w_in[x](t) between a 'first' and a 'last' tag.
//
// Mapping used by this design (its own choice; the method only states that the
// PEs form a 2-D systolic array, T_M = 64 and T_W = 8): in a convolution, row
// x is an output channel and column y an output pixel, so ROWS = T_M and
// COLS = T_W. For bilinear interpolation the caller puts the four neighbour
// pixels of COLS channels on the columns and the four coefficients on row 0
// only.
//
// Finished sums shift up the result chain and leave at row 0 as res_out[y],
// tagged with their row. With a 'last' on row x at step T, column y produces
// the result of row x at cycle T + x + y + 2 + x (two cycles apart per row);
// a new 'last' on a row must follow the previous one by at least 2*ROWS
// cycles when all rows are in use, or results of lower rows are lost.
module computation_engine
  import dcn_pkg::*;
#(
  parameter int unsigned ROWS = dcn_pkg::ROWS,
  parameter int unsigned COLS = dcn_pkg::COLS
) (
  input  logic    clk,
  input  logic    rst_n,
  input  data_t   fm_in  [COLS],
  input  data_t   w_in   [ROWS],
  input  tag_t    tag_in [ROWS],
  output result_t res_out[COLS]
);

  data_t   fm  [ROWS+1][COLS];     // fm[x][y]: into PE(x,y)
  data_t   w   [ROWS][COLS+1];     // w[x][y]:  into PE(x,y)
  tag_t    tg  [ROWS][COLS+1];
  result_t res [ROWS+1][COLS];     // res[x][y]: out of PE(x,y); res[ROWS] = none

  for (genvar y = 0; y < COLS; y++) begin : g_fm_skew
    delay_line #(.WIDTH(DATA_W), .DEPTH(y)) u_dl (
      .clk, .rst_n, .d(fm_in[y]), .q(fm[0][y]));
    assign res[ROWS][y] = '0;
    assign res_out[y]   = res[0][y];
  end

  for (genvar x = 0; x < ROWS; x++) begin : g_w_skew
    delay_line #(.WIDTH(DATA_W + $bits(tag_t)), .DEPTH(x)) u_dl (
      .clk, .rst_n, .d({w_in[x], tag_in[x]}), .q({w[x][0], tg[x][0]}));
  end

  for (genvar x = 0; x < ROWS; x++) begin : g_row
    for (genvar y = 0; y < COLS; y++) begin : g_col
      pe #(.ROW(x)) u_pe (
        .clk, .rst_n,
        .fm_in  (fm[x][y]),   .fm_out (fm[x+1][y]),
        .w_in   (w[x][y]),    .tag_in (tg[x][y]),
        .w_out  (w[x][y+1]),  .tag_out(tg[x][y+1]),
        .res_in (res[x+1][y]), .res_out(res[x][y])
      );
    end
  end

endmodule
