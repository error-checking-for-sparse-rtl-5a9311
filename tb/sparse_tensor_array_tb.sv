// sparse_tensor_array_tb: self-checking test of the 8 x 32 sparse tensor
// array on its own. Shifts in random weights with random 2-bit indexes, feeds
// rows of A with the systolic skew built here (row r of the array gets row i
// of A at cycle i + r) and checks that column c delivers
// sum_r sum_s A[i][4r + idx] * w  at cycle i + R + c, for 2:4 and 1:4.
`timescale 1ns/1ps
module sparse_tensor_array_tb;
  import abft_pkg::*;

  localparam int unsigned R = 8;
  localparam int unsigned C = 32;
  localparam int unsigned N = 40;

  logic clk = 0, rst_n;
  sparsity_e sparsity;
  logic w_load;
  wpair_t w_in [C];
  blk_t a_west [R];
  psum_t col_out [C];

  sparse_tensor_array #(.R(R), .C(C)) dut (.*);
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  wslot_t wsl [R][C][NNZ];
  blk_t   arow [N][R];

  function automatic longint ref_out(int i, int c);
    longint s = 0;
    for (int r = 0; r < R; r++) begin
      s += longint'(arow[i][r][wsl[r][c][0].idx]) * longint'(wsl[r][c][0].w);
      if (sparsity == SP_2_4)
        s += longint'(arow[i][r][wsl[r][c][1].idx]) * longint'(wsl[r][c][1].w);
    end
    return s;
  endfunction

  task automatic run(input sparsity_e sp);
    sparsity = sp;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        for (int s = 0; s < NNZ; s++)
          wsl[r][c][s] = '{w: data_t'($urandom), idx: IDX_W'($urandom)};
    for (int k = 0; k < R; k++) begin
      w_load = 1;
      for (int c = 0; c < C; c++) begin
        w_in[c][0] = wsl[R-1-k][c][0];
        w_in[c][1] = wsl[R-1-k][c][1];
      end
      @(negedge clk);
    end
    w_load = 0;
    for (int i = 0; i < N; i++)
      for (int r = 0; r < R; r++) arow[i][r] = blk_t'($urandom);
    // time t: row r gets arow[t - r]; column c output at t is row t - R - c
    for (int t = 0; t < N + R + C + 1; t++) begin
      for (int r = 0; r < R; r++)
        a_west[r] = (t - r >= 0 && t - r < N) ? arow[t-r][r] : '0;
      #1;
      for (int c = 0; c < C; c++) begin
        int i = t - int'(R) - c;
        if (i >= 0 && i < N) begin
          checks++;
          if (col_out[c] != psum_t'(ref_out(i, c))) begin
            failures++;
            $display("FAIL C[%0d][%0d] = %0d exp %0d", i, c, col_out[c], ref_out(i, c));
          end
        end
      end
      @(negedge clk);
    end
  endtask

  initial begin
    rst_n = 0; sparsity = SP_2_4; w_load = 0;
    for (int c = 0; c < C; c++) w_in[c] = '0;
    for (int r = 0; r < R; r++) a_west[r] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(SP_2_4);
    run(SP_1_4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
