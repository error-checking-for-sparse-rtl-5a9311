// sparse_tensor_array: R x C grid of tensor PEs (tpe) in the weight-stationary
// dataflow, configurable for 2:4 or 1:4 structured sparsity.
//
// TPE row r receives on its west edge a block of four elements of one row of
// A (elements 4r..4r+3) and passes it east, one TPE per cycle. TPE (r, c)
// holds the non-zero weights of rows 4r..4r+3 of column c of W. Partial sums
// start at zero on the north edge and flow south; the bottom TPE of column c
// delivers sum_j A[i][j] W[j][c] on col_out[c].
//
// Timing: if the block of row i of A reaches TPE row r at cycle i + r (the
// usual systolic skew, produced outside this module), col_out[c] carries
// C[i][c] at cycle i + R + c.
//
// Weights: while w_load is high every column shifts down by one TPE, w_in[c]
// entering the top row. After R load cycles the value pushed first sits in
// the bottom row. This load scheme is this design's choice; the grid, the
// dataflow and the TPE follow the paper.
module sparse_tensor_array
  import abft_pkg::*;
#(
  parameter int unsigned R = 8,   // TPE rows
  parameter int unsigned C = 32   // TPE columns
) (
  input  logic      clk,
  input  logic      rst_n,
  input  sparsity_e sparsity,
  input  logic      w_load,
  input  wpair_t    w_in    [C],
  input  blk_t      a_west  [R],
  output psum_t     col_out [C]
);

  blk_t   a_h  [R][C+1];   // horizontal links, [r][0] = west edge
  psum_t  ps_v [R+1][C];   // vertical partial-sum links, [0][c] = north edge
  wpair_t w_v  [R+1][C];   // vertical weight-load links

  for (genvar c = 0; c < C; c++) begin : g_north
    assign ps_v[0][c] = '0;
    assign w_v[0][c]  = w_in[c];
    assign col_out[c] = ps_v[R][c];
  end

  for (genvar r = 0; r < R; r++) begin : g_row
    assign a_h[r][0] = a_west[r];
    for (genvar c = 0; c < C; c++) begin : g_col
      tpe u_tpe (
        .clk      (clk),
        .rst_n    (rst_n),
        .sparsity (sparsity),
        .w_load   (w_load),
        .w_in     (w_v[r][c]),
        .w_out    (w_v[r+1][c]),
        .a_in     (a_h[r][c]),
        .a_out    (a_h[r][c+1]),
        .ps_in    (ps_v[r][c]),
        .ps_out   (ps_v[r+1][c])
      );
    end
  end

endmodule
