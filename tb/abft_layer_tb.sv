// abft_layer_tb: one convolution layer of the size found in ResNet50's second
// stage (a 1x1 convolution on a 56 x 56 x 64 feature map with 64 filters) run
// as a GEMM on the default 8 x 32 checked array, once with 2:4 and once with
// 1:4 weights.
//
// As a GEMM the layer is C[M][N] = A[M][K] * W[K][N] with M = 3136 output
// pixels, K = 64 input channels and N = 64 filters. One array tile holds
// 4R = 32 rows of W (the K dimension) by C = 32 columns (the N dimension), so
// the layer takes 2 x 2 weight tiles. Each tile streams all 3136 rows of A,
// which makes the controller insert a checksum wave after every 256 rows:
// 13 waves per tile, the last one after the final 64 rows. The testbench adds
// the partial results of the two K tiles itself, as the surrounding system
// would.
//
// Activations are non-negative 7-bit values, as after a ReLU and 8-bit
// quantisation, so a full batch of 256 rows drives the input sums close to
// their 16-bit limit. Weights are random non-zero bytes placed with a 2:4 (or
// 1:4) pattern in every 4-row block of every column. In the 1:4 run the
// second weight slot holds a random value that the TPE must ignore.
//
// Checked: every column output of every row against a reference dot product
// of that tile; the layer result (sum over the K tiles) against a dense
// reference GEMM; 13 comparisons per tile, none with a mismatch; the actual
// and predicted checksums at the end of each tile; DIGITS stall cycles for
// each of the 12 waves that interrupt the row stream (the last wave follows
// the final row and stalls nothing); and the 'done' latency after the last row.
`timescale 1ns/1ps
module abft_layer_tb;
  import abft_pkg::*;

  localparam int unsigned R  = 8;
  localparam int unsigned C  = 32;
  localparam int unsigned M  = 3136;
  localparam int unsigned K  = 64;
  localparam int unsigned N  = 64;
  localparam int unsigned KT = K / (BLK * R);
  localparam int unsigned NT = N / C;
  localparam int unsigned WAVES = (M + T_ROWS - 1) / T_ROWS;

  logic      clk = 1'b0;
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

  abft_sta_top dut (.*);

  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // layer operands; wd is the dense weight matrix, slot the packed form
  data_t  amat [M][K];
  data_t  wd   [K][N];
  wslot_t slot [K/BLK][N][NNZ];
  longint cacc [M][N];          // partial results summed over K tiles

  int kt_cur, nt_cur;
  int outidx [C];
  int n_stall, n_chk, n_err;
  int cyc = 0;
  int last_acc_cyc, done_cyc;

  always @(posedge clk) cyc <= cyc + 1;

  // reference output of one tile for row i, array column c
  function automatic longint tile_ref(int i, int c);
    longint s = 0;
    for (int b = 0; b < R; b++)
      for (int k = 0; k < NNZ; k++) begin
        wslot_t ws = slot[kt_cur * R + b][nt_cur * C + c][k];
        if (k == 0 || sparsity == SP_2_4)
          s += longint'(amat[i][(kt_cur * R + b) * BLK + int'(ws.idx)]) * longint'(ws.w);
      end
    return s;
  endfunction

  always @(posedge clk) begin
    if (rst_n && busy) begin
      for (int c = 0; c < C; c++)
        if (c_valid[c]) begin
          if (outidx[c] < M) begin
            automatic longint r = tile_ref(outidx[c], c);
            check(c_out[c] == psum_t'(r),
                  $sformatf("tile (%0d,%0d) C[%0d][%0d]", kt_cur, nt_cur, outidx[c], c));
            cacc[outidx[c]][nt_cur * C + c] += longint'(c_out[c]);
          end
          outidx[c]++;
        end
      if (stall) n_stall++;
      if (chk_valid) n_chk++;
      if (chk_err) n_err++;
      if (done) done_cyc = cyc;
    end
  end

  task automatic make_weights(input sparsity_e sp);
    for (int kb = 0; kb < K / BLK; kb++)
      for (int n = 0; n < N; n++) begin
        int p0, p1;
        data_t v0, v1;
        p0 = $urandom_range(0, BLK - 1);
        p1 = (p0 + $urandom_range(1, BLK - 1)) % BLK;
        do v0 = data_t'($urandom); while (v0 == 0);
        do v1 = data_t'($urandom); while (v1 == 0);
        for (int j = 0; j < BLK; j++) wd[kb * BLK + j][n] = '0;
        wd[kb * BLK + p0][n] = v0;
        if (sp == SP_2_4) wd[kb * BLK + p1][n] = v1;
        slot[kb][n][0] = '{w: v0, idx: IDX_W'(p0)};
        slot[kb][n][1] = '{w: v1, idx: IDX_W'(p1)};  // ignored under 1:4
      end
  endtask

  task automatic run_tile(input int kt, input int nt);
    int sent = 0;
    kt_cur = kt; nt_cur = nt;
    for (int c = 0; c < C; c++) outidx[c] = 0;
    n_stall = 0; n_chk = 0; n_err = 0; done_cyc = -1;
    // bottom TPE row first
    for (int j = 0; j < R; j++) begin
      w_load = 1'b1;
      for (int c = 0; c < C; c++)
        for (int k = 0; k < NNZ; k++) w_in[c][k] = slot[kt * R + (R - 1 - j)][nt * C + c][k];
      @(negedge clk);
    end
    w_load = 1'b0;
    start = 1'b1; @(negedge clk); start = 1'b0;
    while (sent < M) begin
      a_valid = 1'b1;
      a_last  = (sent == M - 1);
      for (int b = 0; b < R; b++)
        for (int j = 0; j < BLK; j++) a_data[b][j] = amat[sent][(kt * R + b) * BLK + j];
      #1;
      if (a_ready) begin
        sent++;
        last_acc_cyc = cyc;
      end
      @(negedge clk);
    end
    a_valid = 1'b0; a_last = 1'b0;
    while (done_cyc < 0) @(negedge clk);
    @(negedge clk);
    begin
      longint tot = 0;
      for (int i = 0; i < M; i++)
        for (int c = 0; c < C; c++) tot += tile_ref(i, c);
      check(act_chk == chk_t'(tot), $sformatf("tile (%0d,%0d) actual checksum", kt, nt));
    end
    check(pred_chk == act_chk, $sformatf("tile (%0d,%0d) predicted = actual", kt, nt));
    check(!err_flag, $sformatf("tile (%0d,%0d) no error flag", kt, nt));
    check(n_chk == WAVES, $sformatf("tile (%0d,%0d) %0d comparisons, expected %0d", kt, nt, n_chk, WAVES));
    check(n_err == 0, $sformatf("tile (%0d,%0d) mismatches %0d", kt, nt, n_err));
    check(n_stall == (WAVES - 1) * DIGITS, $sformatf("tile (%0d,%0d) stall cycles %0d", kt, nt, n_stall));
    check(done_cyc - last_acc_cyc == DIGITS + R + C + 1,
          $sformatf("tile (%0d,%0d) done latency %0d", kt, nt, done_cyc - last_acc_cyc));
    for (int c = 0; c < C; c++) check(outidx[c] == M, "all rows delivered");
  endtask

  task automatic run_layer(input sparsity_e sp);
    sparsity = sp;
    make_weights(sp);
    for (int i = 0; i < M; i++)
      for (int n = 0; n < N; n++) cacc[i][n] = 0;
    for (int nt = 0; nt < NT; nt++)
      for (int kt = 0; kt < KT; kt++) run_tile(kt, nt);
    for (int i = 0; i < M; i++)
      for (int n = 0; n < N; n++) begin
        longint s = 0;
        for (int k = 0; k < K; k++) s += longint'(amat[i][k]) * longint'(wd[k][n]);
        check(cacc[i][n] == s, $sformatf("%s layer C[%0d][%0d]", sp.name(), i, n));
      end
    $display("%s layer: %0d x %0d x %0d done, %0d checks so far, %0d failures",
             sp.name(), M, K, N, checks, failures);
  endtask

  initial begin
    rst_n = 1'b0; sparsity = SP_2_4; w_load = 1'b0; start = 1'b0;
    a_valid = 1'b0; a_last = 1'b0;
    for (int c = 0; c < C; c++) w_in[c] = '0;
    for (int b = 0; b < R; b++) a_data[b] = '0;
    for (int i = 0; i < M; i++)
      for (int k = 0; k < K; k++) amat[i][k] = data_t'($urandom_range(0, 127));
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run_layer(SP_2_4);
    run_layer(SP_1_4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
