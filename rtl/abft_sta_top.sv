// abft_sta_top: structured-sparse systolic tensor array with online ABFT
// error checking at its periphery.
//
// The array computes C = A W for a dense A and a 2:4 or 1:4 structured-sparse
// W held stationary in R x C tensor PEs (4R rows by C columns of W per tile).
// The checker never touches the array itself:
//   - an IC block per row (west edge) accumulates the column sums of A and,
//     after the rows of a batch, feeds them back through the same inputs as an
//     extra "checksum row", digit-serially, so the array itself multiplies
//     them with the stationary weights;
//   - an OC cell per column (south edge) chains the column outputs into one
//     row sum per cycle;
//   - the actual-checksum accumulator adds the row sums of normal rows, the
//     predicted-checksum accumulator the shifted digit sums of checksum rows;
//   - the comparator flags a mismatch after every checksum wave.
// abft_ctrl inserts a checksum wave every T_ROWS = 256 rows and after the last
// row; input_skew forms the systolic skew; a tag pipeline of R + C stages
// carries valid/mode to the south-east corner.
//
// Interface
//   w_load, w_in[c]     load phase: R cycles, bottom TPE row pushed first;
//                        only while busy is low.
//   start               begins a tile and clears the checker.
//   a_valid/a_ready     one row of A per accepted cycle, a_data[r] holding
//   a_last, a_data[r]   elements 4r..4r+3; a_last with the tile's last row.
//   c_out[c], c_valid[c] column c of C; row i accepted at cycle t appears at
//                        cycle t + R + c (skewed, as it leaves the array).
//   act_chk, pred_chk   the two 48-bit checksums.
//   chk_valid, chk_err  one cycle per checksum wave, error when they differ.
//   err_flag, done      sticky error of the tile; done ends the tile.
//   stall               a checksum wave is interrupting the row stream.
// The sizes default to the 8 x 32 array of the paper's fault study.
module abft_sta_top
  import abft_pkg::*;
#(
  parameter int unsigned R = 8,
  parameter int unsigned C = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  sparsity_e sparsity,
  input  logic      w_load,
  input  wpair_t    w_in     [C],
  input  logic      start,
  input  logic      a_valid,
  input  logic      a_last,
  input  blk_t      a_data   [R],
  output logic      a_ready,
  output logic      busy,
  output logic      stall,
  output psum_t     c_out    [C],
  output logic      c_valid  [C],
  output chk_t      act_chk,
  output chk_t      pred_chk,
  output logic      chk_valid,
  output logic      chk_err,
  output logic      err_flag,
  output logic      done
);

  localparam int unsigned LAT = R + C;   // array entry to accumulator input

  tag_t  tag0;
  tag_t  tag_d [LAT+1];
  logic  clr;
  blk_t  a_gated [R];
  logic  sk_valid [R];
  mode_e sk_mode  [R];
  blk_t  sk_data  [R];
  blk_t  a_west   [R];
  psum_t col_out  [C];
  psum_t oc_sum   [C+1];

  abft_ctrl u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .a_valid   (a_valid),
    .a_last    (a_last),
    .a_ready   (a_ready),
    .clr       (clr),
    .tag       (tag0),
    .busy      (busy),
    .stall     (stall),
    .tile_done (done)
  );

  // Rows that are not taken enter the array as zeros.
  for (genvar r = 0; r < R; r++) begin : g_gate
    assign a_gated[r] = (a_valid && a_ready) ? a_data[r] : '0;
  end

  input_skew #(.R(R)) u_skew (
    .clk       (clk),
    .rst_n     (rst_n),
    .valid_in  (tag0.valid),
    .mode_in   (tag0.mode),
    .data_in   (a_gated),
    .valid_out (sk_valid),
    .mode_out  (sk_mode),
    .data_out  (sk_data)
  );

  for (genvar r = 0; r < R; r++) begin : g_ic
    ic u_ic (
      .clk   (clk),
      .rst_n (rst_n),
      .clr   (clr),
      .valid (sk_valid[r]),
      .mode  (sk_mode[r]),
      .a_in  (sk_data[r]),
      .a_out (a_west[r])
    );
  end

  sparse_tensor_array #(.R(R), .C(C)) u_array (
    .clk      (clk),
    .rst_n    (rst_n),
    .sparsity (sparsity),
    .w_load   (w_load),
    .w_in     (w_in),
    .a_west   (a_west),
    .col_out  (col_out)
  );

  assign oc_sum[0] = '0;
  for (genvar c = 0; c < C; c++) begin : g_oc
    oc u_oc (
      .clk     (clk),
      .rst_n   (rst_n),
      .col_in  (col_out[c]),
      .sum_in  (oc_sum[c]),
      .sum_out (oc_sum[c+1])
    );
  end

  // Tag pipeline: tag_d[k] is the tag of the wave that entered k cycles ago.
  assign tag_d[0] = tag0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 1; k <= LAT; k++) tag_d[k] <= '0;
    end else begin
      for (int k = 1; k <= LAT; k++) tag_d[k] <= tag_d[k-1];
    end
  end

  for (genvar c = 0; c < C; c++) begin : g_out
    assign c_out[c]   = col_out[c];
    assign c_valid[c] = tag_d[R+c].valid && (tag_d[R+c].mode == MODE_NORMAL);
  end

  actual_acc u_act (
    .clk    (clk),
    .rst_n  (rst_n),
    .clr    (clr),
    .valid  (tag_d[LAT].valid),
    .mode   (tag_d[LAT].mode),
    .sum_in (oc_sum[C]),
    .acc    (act_chk)
  );

  predicted_acc u_pred (
    .clk    (clk),
    .rst_n  (rst_n),
    .clr    (clr),
    .valid  (tag_d[LAT].valid),
    .mode   (tag_d[LAT].mode),
    .sum_in (oc_sum[C]),
    .acc    (pred_chk)
  );

  checksum_cmp u_cmp (
    .clk       (clk),
    .rst_n     (rst_n),
    .clr       (clr),
    .check     (tag_d[LAT].check),
    .fin       (tag_d[LAT].fin),
    .act       (act_chk),
    .pred      (pred_chk),
    .chk_valid (chk_valid),
    .chk_err   (chk_err),
    .err_flag  (err_flag),
    .done      (done)
  );

  // Weights may only be loaded while no tile is in flight.
  w_load_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                w_load |-> !busy);

endmodule
