// systolic_array: R x C grid of weight-stationary processing elements.
//
// Inputs enter each row at the west edge and move one PE east per cycle;
// partial sums start at zero above the top row, move one PE south per cycle
// and leave at the south edge of each column. Weights enter the top row from
// the north and, while w_shift is high, move one row down per cycle: after R
// shift cycles the word presented first sits in the bottom row. This is the
// connectivity of the generic array the paper draws (inputs from a West
// buffer, weights from a North buffer, results to the South).
//
// Timing: if the element for row r of input vector n is presented at a_west
// in cycle n + r (rows staggered by one cycle each), the dot product of that
// vector with weight column c appears at psum_south[c] in cycle n + R + c.
// The staggering on the way in and out is done outside, by skew_buffer.
module systolic_array #(
  parameter int unsigned R  = sa_pkg::SA_ROWS,
  parameter int unsigned C  = sa_pkg::SA_COLS,
  parameter int unsigned BH = sa_pkg::SA_BH,
  parameter int unsigned BV = sa_pkg::SA_BV
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  w_shift,
  input  logic [C-1:0][BH-1:0]  w_north,
  input  logic [R-1:0][BH-1:0]  a_west,
  output logic [C-1:0][BV-1:0]  psum_south
);

  // Nets between PEs: a_h[r][c] enters PE(r,c) from the west, w_v[r][c] and
  // p_v[r][c] enter PE(r,c) from the north. Index C / R is the far edge.
  logic [BH-1:0] a_h [R][C+1];
  logic [BH-1:0] w_v [R+1][C];
  logic [BV-1:0] p_v [R+1][C];

  for (genvar r = 0; r < R; r++) begin : g_west
    assign a_h[r][0] = a_west[r];
  end

  for (genvar c = 0; c < C; c++) begin : g_north
    assign w_v[0][c]     = w_north[c];
    assign p_v[0][c]     = '0;
    assign psum_south[c] = p_v[R][c];
  end

  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar c = 0; c < C; c++) begin : g_col
      pe #(.BH(BH), .BV(BV)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .w_shift  (w_shift),
        .w_in     (w_v[r][c]),
        .w_out    (w_v[r+1][c]),
        .a_in     (a_h[r][c]),
        .a_out    (a_h[r][c+1]),
        .psum_in  (p_v[r][c]),
        .psum_out (p_v[r+1][c])
      );
    end
  end

endmodule
