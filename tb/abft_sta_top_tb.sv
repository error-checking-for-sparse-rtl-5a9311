// abft_sta_top_tb: end-to-end test of the checked sparse tensor array at its
// default size (8 x 32 TPEs).
//
// Loads random 2:4 / 1:4 sparse weights, streams tiles of random rows of A
// with random bubbles and compares every column output against a reference
// product computed here from the same weights and rows, including the cycle
// at which it leaves the array (R + c cycles after the row was accepted).
// At the end of each tile it checks the actual checksum against the sum of
// the reference outputs, the predicted checksum against the actual one, and
// the cycle of done. Tiles cover: a short 2:4 tile, a 300-row tile (one
// checksum wave interrupts the stream after 256 rows), two 256-row tiles of
// extreme inputs (-128 and +127: the largest input checksums), a 1:4 tile
// with non-zero (ignored) second weights, and a tile in which a bit of a
// stationary weight register is flipped mid-tile, which the checker must flag.
// Each mechanism (weight load, bubble, stall, 2:4, 1:4, detected error) is
// counted, and one that never happened counts as a failure.
`timescale 1ns/1ps
module abft_sta_top_tb;
  import abft_pkg::*;

  localparam int unsigned R = 8;
  localparam int unsigned C = 32;
  localparam int unsigned MAXROWS = 320;

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
  longint      cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // reference state
  wslot_t wsl   [R][C][NNZ];
  blk_t   arow  [MAXROWS][R];
  longint acyc  [MAXROWS];
  int     nacc;
  bit     faulty = 0;   // outputs may differ from the reference
  int     outidx [C];
  longint ref_total;
  int     n_chk, n_chkerr;
  longint last_acc_cyc, done_cyc;

  // mechanism counters
  int m_wload = 0, m_bubble = 0, m_stall = 0, m_sp24 = 0, m_sp14 = 0, m_err = 0;

  function automatic longint ref_out(int i, int c);
    longint s = 0;
    for (int r = 0; r < R; r++) begin
      s += longint'(arow[i][r][wsl[r][c][0].idx]) * longint'(wsl[r][c][0].w);
      if (sparsity == SP_2_4)
        s += longint'(arow[i][r][wsl[r][c][1].idx]) * longint'(wsl[r][c][1].w);
    end
    return s;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // output monitor
  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < C; c++) begin
        if (c_valid[c]) begin
          automatic int i = outidx[c];
          automatic longint e = ref_out(i, c);
          if (!faulty) check(c_out[c] == psum_t'(e),
                $sformatf("C[%0d][%0d]=%0d exp %0d", i, c, c_out[c], e));
          check(cyc == acyc[i] + R + c,
                $sformatf("C[%0d][%0d] at %0d exp %0d", i, c, cyc, acyc[i] + R + c));
          outidx[c] = i + 1;
        end
      end
      if (chk_valid) begin
        n_chk++;
        if (chk_err) n_chkerr++;
      end
      if (a_valid && a_ready) begin
        if (nacc < MAXROWS) acyc[nacc] = cyc;
        nacc++;
        if (a_last) last_acc_cyc = cyc;
      end
      if (stall) m_stall++;
      if (done) done_cyc = cyc;
    end
  end

  task automatic gen_weights(input int kind);
    // kind 0: random 2:4 (two distinct indexes), 1: random with some zeros
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        int i0 = $urandom_range(0, 3);
        int i1 = (i0 + $urandom_range(1, 3)) % 4;
        wsl[r][c][0].idx = IDX_W'(i0);
        wsl[r][c][1].idx = IDX_W'(i1);
        wsl[r][c][0].w   = data_t'($urandom);
        wsl[r][c][1].w   = (kind == 1 && $urandom_range(0, 3) == 0) ? '0 : data_t'($urandom);
      end
  endtask

  task automatic load_weights();
    for (int k = 0; k < R; k++) begin
      @(negedge clk);
      w_load = 1'b1;
      for (int c = 0; c < C; c++) begin
        w_in[c][0] = wsl[R-1-k][c][0];
        w_in[c][1] = wsl[R-1-k][c][1];
      end
    end
    @(negedge clk);
    w_load = 1'b0;
    m_wload++;
  endtask

  // dkind 0: random, 1: all -128, 2: all +127
  task automatic run_tile(input int nrows, input sparsity_e sp, input int dkind,
                          input int bubble_pct, input bit inject);
    int sent = 0;
    longint t_start;
    bit injected = 0;
    sparsity  = sp;
    nacc      = 0;
    ref_total = 0;
    n_chk     = 0;
    n_chkerr  = 0;
    done_cyc  = -1;
    for (int c = 0; c < C; c++) outidx[c] = 0;
    for (int i = 0; i < nrows; i++)
      for (int r = 0; r < R; r++)
        for (int k = 0; k < BLK; k++)
          arow[i][r][k] = (dkind == 1) ? data_t'(-128) :
                          (dkind == 2) ? data_t'(127)  : data_t'($urandom);
    if (sp == SP_2_4) m_sp24++; else m_sp14++;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t_start = cyc;
    while (sent < nrows) begin
      if (bubble_pct > 0 && $urandom_range(0, 99) < bubble_pct) begin
        a_valid = 1'b0;
        m_bubble++;
      end else begin
        a_valid = 1'b1;
        a_last  = (sent == nrows - 1);
        for (int r = 0; r < R; r++) a_data[r] = arow[sent][r];
      end
      #1;
      if (a_valid && a_ready) sent++;
      @(negedge clk);
      if (inject && !injected && sent == nrows / 2) begin
        // flip bit 6 of the slot-0 weight of TPE (3, 7)
        wpair_t v;
        a_valid = 1'b0;
        v = dut.u_array.g_row[3].g_col[7].u_tpe.w_q;
        v[0].w[6] = ~v[0].w[6];
        force dut.u_array.g_row[3].g_col[7].u_tpe.w_q = v;
        @(negedge clk);
        release dut.u_array.g_row[3].g_col[7].u_tpe.w_q;
        injected = 1;
        faulty   = 1;
      end
    end
    a_valid = 1'b0;
    a_last  = 1'b0;
    while (done_cyc < 0 && cyc < t_start + 4 * nrows + 400) @(negedge clk);
    for (int i = 0; i < nrows; i++)
      for (int c = 0; c < C; c++) ref_total += ref_out(i, c);
    check(done_cyc == last_acc_cyc + DIGITS + R + C + 1,
          $sformatf("done at %0d exp %0d", done_cyc, last_acc_cyc + DIGITS + R + C + 1));
    check(n_chk == (nrows + T_ROWS - 1) / T_ROWS,
          $sformatf("checksum waves %0d exp %0d", n_chk, (nrows + T_ROWS - 1) / T_ROWS));
    for (int c = 0; c < C; c++)
      check(outidx[c] == nrows, $sformatf("col %0d gave %0d rows", c, outidx[c]));
    faulty = 0;
    if (!inject) begin
      check(act_chk == chk_t'(ref_total),
            $sformatf("actual %0d exp %0d", act_chk, ref_total));
      check(pred_chk == act_chk, $sformatf("pred %0d act %0d", pred_chk, act_chk));
      check(!err_flag && n_chkerr == 0, "false error flag");
    end else begin
      check(err_flag && n_chkerr > 0, "injected fault not detected");
      if (err_flag) m_err++;
    end
    @(negedge clk);
    check(!busy, "busy after done");
  endtask

  initial begin
    rst_n = 1'b0; sparsity = SP_2_4; w_load = 1'b0; start = 1'b0;
    a_valid = 1'b0; a_last = 1'b0;
    for (int c = 0; c < C; c++) w_in[c] = '0;
    for (int r = 0; r < R; r++) a_data[r] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    gen_weights(1);
    load_weights();
    run_tile(20, SP_2_4, 0, 20, 0);
    run_tile(300, SP_2_4, 0, 10, 0);
    run_tile(256, SP_2_4, 1, 0, 0);
    run_tile(256, SP_2_4, 2, 0, 0);
    gen_weights(0);
    load_weights();
    run_tile(40, SP_1_4, 0, 10, 0);
    run_tile(60, SP_2_4, 0, 0, 1);
    gen_weights(0);
    load_weights();
    run_tile(10, SP_2_4, 0, 0, 0);

    $display("mechanisms: wload=%0d bubble=%0d stall=%0d sp24=%0d sp14=%0d err=%0d",
             m_wload, m_bubble, m_stall, m_sp24, m_sp14, m_err);
    check(m_wload > 0,  "weight load never happened");
    check(m_bubble > 0, "bubble never happened");
    check(m_stall > 0,  "checksum stall never happened");
    check(m_sp24 > 0,   "2:4 tile never ran");
    check(m_sp14 > 0,   "1:4 tile never ran");
    check(m_err > 0,    "fault detection never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
