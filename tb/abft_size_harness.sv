// abft_size_harness: drives one abft_sta_top of a given size through one
// 2:4 tile of NROWS random rows (more than 256, so a checksum wave also
// interrupts the stream) and checks every column output against a reference
// product, the actual checksum against the sum of all reference outputs, and
// that the predicted checksum matches with no error flag. Used by
// abft_sta_top_sizes_tb for the larger array sizes.
`timescale 1ns/1ps
module abft_size_harness
  import abft_pkg::*;
#(
  parameter int unsigned R     = 16,
  parameter int unsigned C     = 64,
  parameter int unsigned NROWS = 300
) (
  input  logic        clk,
  output logic        finished,
  output int unsigned checks,
  output int unsigned failures
);

  logic      rst_n;
  sparsity_e sparsity;
  logic      w_load;
  wpair_t    w_in [C];
  logic      start, a_valid, a_last, a_ready, busy, stall;
  blk_t      a_data [R];
  psum_t     c_out [C];
  logic      c_valid [C];
  chk_t      act_chk, pred_chk;
  logic      chk_valid, chk_err, err_flag, done;

  abft_sta_top #(.R(R), .C(C)) dut (.*);

  wslot_t wsl  [R][C][NNZ];
  blk_t   arow [NROWS][R];
  int     outidx [C];
  int     n_stall = 0;

  function automatic longint ref_out(int i, int c);
    longint s = 0;
    for (int r = 0; r < R; r++)
      for (int k = 0; k < NNZ; k++)
        s += longint'(arow[i][r][wsl[r][c][k].idx]) * longint'(wsl[r][c][k].w);
    return s;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (%0dx%0d): %s", R, C, what); end
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < C; c++)
        if (c_valid[c]) begin
          if (outidx[c] < NROWS)
            check(c_out[c] == psum_t'(ref_out(outidx[c], c)), $sformatf("C[%0d][%0d]", outidx[c], c));
          outidx[c]++;
        end
      if (stall) n_stall++;
    end
  end

  initial begin
    longint total = 0;
    int sent = 0;
    finished = 0; checks = 0; failures = 0;
    rst_n = 0; sparsity = SP_2_4; w_load = 0; start = 0; a_valid = 0; a_last = 0;
    for (int c = 0; c < C; c++) begin w_in[c] = '0; outidx[c] = 0; end
    for (int r = 0; r < R; r++) a_data[r] = '0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        for (int k = 0; k < NNZ; k++)
          wsl[r][c][k] = '{w: data_t'($urandom), idx: IDX_W'((k == 0) ? $urandom_range(0, 1) : $urandom_range(2, 3))};
    for (int i = 0; i < NROWS; i++)
      for (int r = 0; r < R; r++) arow[i][r] = blk_t'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < R; j++) begin
      w_load = 1;
      for (int c = 0; c < C; c++) begin
        w_in[c][0] = wsl[R-1-j][c][0];
        w_in[c][1] = wsl[R-1-j][c][1];
      end
      @(negedge clk);
    end
    w_load = 0;
    start = 1; @(negedge clk); start = 0;
    while (sent < NROWS) begin
      a_valid = 1; a_last = (sent == NROWS - 1);
      for (int r = 0; r < R; r++) a_data[r] = arow[sent][r];
      #1 if (a_ready) sent++;
      @(negedge clk);
    end
    a_valid = 0; a_last = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int i = 0; i < NROWS; i++)
      for (int c = 0; c < C; c++) total += ref_out(i, c);
    check(act_chk == chk_t'(total), "actual checksum");
    check(pred_chk == act_chk, "predicted checksum");
    check(!err_flag, "no error flag");
    check(n_stall == DIGITS, "one interrupting checksum wave");
    for (int c = 0; c < C; c++) check(outidx[c] == NROWS, "all rows out");
    finished = 1;
  end

endmodule
