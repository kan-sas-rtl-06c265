// systolic_array: R x C weight-stationary grid of N:M processing elements.
//
// Row r receives, from the left, the N activation lanes and the index k
// produced for one input feature; each PE registers them and hands them to
// its right neighbour. Column c accumulates downwards: the top PE starts from
// zero and the bottom PE delivers psum_bottom[c]. Coefficients enter at the
// top of each column and shift down one row per cycle while w_load is high,
// so after R load cycles row r holds the (R-1-r)-th vector that was pushed.
//
// Timing: an operand presented to row r at cycle t reaches column c at
// t + c; the column sum for an input vector whose row r is presented at
// cycle t0 + r appears on psum_bottom[c] at cycle t0 + R + c. The caller
// skews the rows accordingly. The grid and its data movement follow the
// paper; the coefficient shift-in is this design's choice.
module systolic_array #(
  parameter int unsigned R  = kansas_pkg::ROWS,
  parameter int unsigned C  = kansas_pkg::COLS,
  parameter int unsigned N  = kansas_pkg::NNZ,
  parameter int unsigned M  = kansas_pkg::NBASIS,
  parameter int unsigned KW = $clog2(M + N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              w_load,
  input  kansas_pkg::coef_t w_top       [C][M],
  input  kansas_pkg::act_t  a_left      [R][N],
  input  logic [KW-1:0]     k_left      [R],
  output kansas_pkg::psum_t psum_bottom [C]
);
  import kansas_pkg::*;

  // horizontal (activations, k), vertical (psum, coefficients) links
  act_t          a_h [R][C+1][N];
  logic [KW-1:0] k_h [R][C+1];
  psum_t         p_v [R+1][C];
  coef_t         w_v [R+1][C][M];

  for (genvar r = 0; r < R; r++) begin : g_row_in
    assign a_h[r][0] = a_left[r];
    assign k_h[r][0] = k_left[r];
  end
  for (genvar c = 0; c < C; c++) begin : g_col_io
    assign p_v[0][c]      = '0;
    assign w_v[0][c]      = w_top[c];
    assign psum_bottom[c] = p_v[R][c];
  end

  for (genvar r = 0; r < R; r++) begin : g_r
    for (genvar c = 0; c < C; c++) begin : g_c
      nm_pe #(.N(N), .M(M), .KW(KW)) u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .w_load  (w_load),
        .w_in    (w_v[r][c]),
        .w_out   (w_v[r+1][c]),
        .a_in    (a_h[r][c]),
        .k_in    (k_h[r][c]),
        .a_out   (a_h[r][c+1]),
        .k_out   (k_h[r][c+1]),
        .psum_in (p_v[r][c]),
        .psum_out(p_v[r+1][c])
      );
    end
  end
endmodule
