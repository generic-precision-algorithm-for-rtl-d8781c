// dct2d -- 8x8 two-dimensional DCT processor (top level).
//
// The 2-D DCT of an 8x8 block, F(u,v) = 1/4 C(u) C(v) sum_y sum_x f(y,x)
// cos((2x+1) v pi/16) cos((2y+1) u pi/16), is separable: a 1-D DCT of every row,
// a transposition, and a 1-D DCT of every column. Both 1-D passes are the
// shift-and-add CORDIC DCT of dct1d, whose rotators use the micro-rotation lists
// of precision PREC.
//
//   in_row --> dct1d (rows) --> transpose_buffer --> dct1d (columns) --> out_col
//
// Interface: a block enters as eight in_valid beats, beat y carrying row y,
// in_row[x] = f(y,x) (IN_W-bit signed, e.g. level-shifted pixels). It leaves as
// eight out_valid beats, beat v carrying column v of the coefficient block,
// out_col[u] = F(u,v) (OUT_W-bit signed integers). Row results are rounded to
// ROW_W-bit integers before the transposition.
//
// Timing: one row in and one column out per clock; blocks may follow each other
// without a gap. If the last row of a block is presented in clock cycle c, its
// column v is presented on out_col in cycle c + 10 + v: four cycles in the row
// DCT, one to write the transpose bank, one to read the first column, four in
// the column DCT. Synchronous active-low reset.
//
// The row / transpose / column structure follows the paper; word widths,
// intermediate rounding and the streaming interface are this design's choices.
module dct2d
  import dct_cordic_pkg::*;
#(
  parameter int    IN_W   = 8,
  parameter int    ROW_W  = 11,
  parameter int    OUT_W  = 14,
  parameter int    FRAC_W = 12,
  parameter prec_e PREC   = PREC_1E3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_row [8],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_col [8]
);

  logic                    row_valid, col_valid;
  logic signed [ROW_W-1:0] row_coef [8];
  logic signed [ROW_W-1:0] col_data [8];

  dct1d #(.IN_W(IN_W), .OUT_W(ROW_W), .FRAC_W(FRAC_W), .PREC(PREC)) u_row_dct (
    .clk, .rst_n, .in_valid, .x(in_row), .out_valid(row_valid), .X(row_coef)
  );

  transpose_buffer #(.N(8), .W(ROW_W)) u_transpose (
    .clk, .rst_n, .in_valid(row_valid), .row(row_coef), .out_valid(col_valid), .col(col_data)
  );

  dct1d #(.IN_W(ROW_W), .OUT_W(OUT_W), .FRAC_W(FRAC_W), .PREC(PREC)) u_col_dct (
    .clk, .rst_n, .in_valid(col_valid), .x(col_data), .out_valid, .X(out_col)
  );

endmodule
