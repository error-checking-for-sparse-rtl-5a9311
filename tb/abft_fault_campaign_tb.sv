// abft_fault_campaign_tb: random fault-injection campaigns on the 8 x 32
// checked array, in the manner of the fault study that motivates the design.
//
// Each campaign loads random sparse weights (2:4 in the first half of the
// campaigns, 1:4 in the second), streams a tile of 16..64 random rows of A and
// flips bits of registers at random cycles while the rows enter the array. A site is drawn with probability
// proportional to its number of bits, from the TPE weight registers, the TPE
// east (input) registers, the TPE south (partial-sum) registers, the IC
// accumulators, the OC registers and the two checksum accumulators. The
// first third of each half injects one fault per campaign, the rest 1..5;
// every tenth campaign injects none. Outcomes are sorted as
//   detected        a fault hit the array and the checker flagged it,
//   silent          a fault hit the array, the checker stayed fault-free and
//                   did not flag it (output may or may not be wrong),
//   false positive  flagged, but only the checker was hit,
//   false negative  not flagged although the array and the checker were hit,
// and the rates are printed. Checks that must always hold are counted: no
// flag and correct outputs without faults, and detection of every single
// flip of a partial-sum register (its error reaches exactly one output and
// cannot cancel) whenever that flip made an output wrong.
//
// A bit flip is made by forcing register ^ mask just after a clock edge and
// releasing it before the next one; the register keeps the flipped value
// until it is next written.
`timescale 1ns/1ps
module abft_fault_campaign_tb;
  import abft_pkg::*;

  localparam int unsigned R = 8;
  localparam int unsigned C = 32;
  localparam int unsigned NCAMP = 400;
  localparam int unsigned MAXROWS = 64;

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
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- sites
  // kind: 0 TPE weights, 1 TPE east register, 2 TPE partial sum,
  //       3 IC accumulators, 4 OC register, 5 actual acc, 6 predicted acc
  localparam int unsigned BITS_W  = $bits(wpair_t);
  localparam int unsigned BITS_A  = $bits(blk_t);
  localparam int unsigned BITS_P  = PSUM_W;
  localparam int unsigned BITS_IC = BLK * IC_W;
  localparam int unsigned N_ARRAY = R * C * (BITS_W + BITS_A + BITS_P);
  localparam int unsigned N_CHK   = R * BITS_IC + C * PSUM_W + 2 * CHK_W;

  logic inj_go = 1'b0;
  int   inj_kind, inj_r, inj_c, inj_bit;

  for (genvar r = 0; r < R; r++) begin : g_r
    for (genvar c = 0; c < C; c++) begin : g_c
      wpair_t vw;
      blk_t   va;
      psum_t  vp;
      int     kl;   // kind latched here: inj_kind may change before release
      always @(posedge clk) begin
        if (inj_go && inj_r == r && inj_c == c && inj_kind <= 2) begin
          #1;
          vw = dut.u_array.g_row[r].g_col[c].u_tpe.w_q ^ (wpair_t'(1) << inj_bit);
          va = dut.u_array.g_row[r].g_col[c].u_tpe.a_q ^ (blk_t'(1) << inj_bit);
          vp = dut.u_array.g_row[r].g_col[c].u_tpe.ps_q ^ (psum_t'(1) << inj_bit);
          kl = inj_kind;
          case (kl)
            0: force dut.u_array.g_row[r].g_col[c].u_tpe.w_q = vw;
            1: force dut.u_array.g_row[r].g_col[c].u_tpe.a_q = va;
            default: force dut.u_array.g_row[r].g_col[c].u_tpe.ps_q = vp;
          endcase
          @(negedge clk);
          case (kl)
            0: release dut.u_array.g_row[r].g_col[c].u_tpe.w_q;
            1: release dut.u_array.g_row[r].g_col[c].u_tpe.a_q;
            default: release dut.u_array.g_row[r].g_col[c].u_tpe.ps_q;
          endcase
        end
      end
    end
  end

  for (genvar r = 0; r < R; r++) begin : g_icf
    logic [BITS_IC-1:0] v;
    always @(posedge clk) begin
      if (inj_go && inj_kind == 3 && inj_r == r) begin
        #1;
        v = dut.g_ic[r].u_ic.acc ^ ((BITS_IC)'(1) << inj_bit);
        force dut.g_ic[r].u_ic.acc = v;
        @(negedge clk);
        release dut.g_ic[r].u_ic.acc;
      end
    end
  end

  for (genvar c = 0; c < C; c++) begin : g_ocf
    psum_t v;
    always @(posedge clk) begin
      if (inj_go && inj_kind == 4 && inj_c == c) begin
        #1;
        v = dut.g_oc[c].u_oc.sum_q ^ (psum_t'(1) << inj_bit);
        force dut.g_oc[c].u_oc.sum_q = v;
        @(negedge clk);
        release dut.g_oc[c].u_oc.sum_q;
      end
    end
  end

  chk_t vacc;
  always @(posedge clk) begin
    if (inj_go && inj_kind == 5) begin
      #1;
      vacc = dut.u_act.acc ^ (chk_t'(1) << inj_bit);
      force dut.u_act.acc = vacc;
      @(negedge clk);
      release dut.u_act.acc;
    end else if (inj_go && inj_kind == 6) begin
      #1;
      vacc = dut.u_pred.acc ^ (chk_t'(1) << inj_bit);
      force dut.u_pred.acc = vacc;
      @(negedge clk);
      release dut.u_pred.acc;
    end
  end

  // Draw a site proportionally to its number of bits.
  task automatic draw_site(output int kind, output int r, output int c, output int b);
    int unsigned x = $urandom_range(0, N_ARRAY + N_CHK - 1);
    r = $urandom_range(0, R - 1);
    c = $urandom_range(0, C - 1);
    if (x < R * C * BITS_W) begin kind = 0; b = $urandom_range(0, BITS_W - 1); end
    else if (x < R * C * (BITS_W + BITS_A)) begin kind = 1; b = $urandom_range(0, BITS_A - 1); end
    else if (x < N_ARRAY) begin kind = 2; b = $urandom_range(0, BITS_P - 1); end
    else begin
      int unsigned y = x - N_ARRAY;
      if (y < R * BITS_IC) begin kind = 3; b = $urandom_range(0, BITS_IC - 1); end
      else if (y < R * BITS_IC + C * PSUM_W) begin kind = 4; b = $urandom_range(0, PSUM_W - 1); end
      else begin kind = $urandom_range(5, 6); b = $urandom_range(0, CHK_W - 1); end
    end
  endtask

  // ------------------------------------------------------------ reference
  wslot_t wsl  [R][C][NNZ];
  blk_t   arow [MAXROWS][R];
  int     outidx [C];
  bit     out_bad;

  function automatic longint ref_out(int i, int c);
    longint s = 0;
    for (int r = 0; r < R; r++) begin
      s += longint'(arow[i][r][wsl[r][c][0].idx]) * longint'(wsl[r][c][0].w);
      if (sparsity == SP_2_4)
        s += longint'(arow[i][r][wsl[r][c][1].idx]) * longint'(wsl[r][c][1].w);
    end
    return s;
  endfunction

  always @(posedge clk) begin
    for (int c = 0; c < C; c++) begin
      if (rst_n && c_valid[c]) begin
        if (outidx[c] < MAXROWS && c_out[c] != psum_t'(ref_out(outidx[c], c))) out_bad = 1;
        outidx[c]++;
      end
    end
  end

  // --------------------------------------------------------------- tallies
  int n_det[2], n_sil[2], n_silbad[2], n_fp[2], n_fn[2], n_none[2], n_benign[2], n_camp[2];
  int n_ps_single = 0;

  task automatic campaign(input int k, input sparsity_e sp, input int nfaults);
    int n = $urandom_range(16, MAXROWS);
    int sent = 0, cyc = 0;
    int when [5];
    int kinds [5], rs [5], cs [5], bs [5];
    int fi = 0;
    bit hit_array = 0, hit_chk = 0, flagged;
    int m = (nfaults > 1) ? 1 : 0;
    sparsity = sp;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        for (int s = 0; s < NNZ; s++) begin
          wsl[r][c][s].w   = data_t'($urandom);
          wsl[r][c][s].idx = IDX_W'($urandom);
        end
    for (int j = 0; j < R; j++) begin
      @(negedge clk);
      w_load = 1'b1;
      for (int c = 0; c < C; c++) begin
        w_in[c][0] = wsl[R-1-j][c][0];
        w_in[c][1] = wsl[R-1-j][c][1];
      end
    end
    @(negedge clk);
    w_load = 1'b0;
    for (int i = 0; i < n; i++)
      for (int r = 0; r < R; r++) arow[i][r] = blk_t'($urandom);
    for (int f = 0; f < nfaults; f++) begin
      when[f] = $urandom_range(1, n + DIGITS);
      draw_site(kinds[f], rs[f], cs[f], bs[f]);
      if (kinds[f] <= 2) hit_array = 1; else hit_chk = 1;
    end
    // sort injection times
    for (int i = 0; i < nfaults; i++)
      for (int j = i + 1; j < nfaults; j++)
        if (when[j] < when[i]) begin
          int t;
          t = when[i]; when[i] = when[j]; when[j] = t;
          t = kinds[i]; kinds[i] = kinds[j]; kinds[j] = t;
          t = rs[i]; rs[i] = rs[j]; rs[j] = t;
          t = cs[i]; cs[i] = cs[j]; cs[j] = t;
          t = bs[i]; bs[i] = bs[j]; bs[j] = t;
        end
    for (int c = 0; c < C; c++) outidx[c] = 0;
    out_bad = 0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done && cyc < n + 300) begin
      if (sent < n) begin
        a_valid = 1'b1;
        a_last  = (sent == n - 1);
        for (int r = 0; r < R; r++) a_data[r] = arow[sent][r];
      end else begin
        a_valid = 1'b0;
        a_last  = 1'b0;
      end
      inj_go = 1'b0;
      while (fi < nfaults && when[fi] == cyc) begin
        // one site per cycle; later ones in the same cycle move on by one
        inj_kind = kinds[fi]; inj_r = rs[fi]; inj_c = cs[fi]; inj_bit = bs[fi];
        inj_go = 1'b1;
        fi++;
        if (fi < nfaults && when[fi] == cyc) when[fi]++;
        break;
      end
      #1;
      if (a_valid && a_ready) sent++;
      @(negedge clk);
      inj_go = 1'b0;
      cyc++;
    end
    @(negedge clk);
    flagged = err_flag;   // set by the comparison that ends the tile
    n_camp[m]++;
    if (nfaults == 0) begin
      check(!flagged && !out_bad, $sformatf("campaign %0d: fault-free run flagged=%0d wrong=%0d", k, flagged, out_bad));
      n_none[m]++;
    end else if (flagged && hit_array) n_det[m]++;
    else if (flagged)                  n_fp[m]++;
    else if (hit_array && hit_chk)     n_fn[m]++;
    else if (hit_array) begin
      n_sil[m]++;
      if (out_bad) n_silbad[m]++;
    end else n_benign[m]++;
    if (nfaults == 1 && kinds[0] == 2 && out_bad) begin
      n_ps_single++;
      check(flagged, $sformatf("campaign %0d: partial-sum flip not detected", k));
    end
  endtask

  function automatic real pct(int a, int b);
    return (b == 0) ? 0.0 : 100.0 * real'(a) / real'(b);
  endfunction

  initial begin
    rst_n = 1'b0; sparsity = SP_2_4; w_load = 1'b0; start = 1'b0;
    a_valid = 1'b0; a_last = 1'b0;
    inj_kind = 0; inj_r = 0; inj_c = 0; inj_bit = 0;
    for (int c = 0; c < C; c++) w_in[c] = '0;
    for (int r = 0; r < R; r++) a_data[r] = '0;
    for (int m = 0; m < 2; m++) begin
      n_det[m] = 0; n_sil[m] = 0; n_silbad[m] = 0; n_fp[m] = 0; n_fn[m] = 0;
      n_none[m] = 0; n_benign[m] = 0; n_camp[m] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < NCAMP; k++) begin
      automatic sparsity_e sp = (k < NCAMP / 2) ? SP_2_4 : SP_1_4;
      automatic int kk = k % (NCAMP / 2);
      automatic int nf = (k % 10 == 9) ? 0 : (kk < NCAMP / 6) ? 1 : $urandom_range(1, 5);
      campaign(k, sp, nf);
    end
    for (int m = 0; m < 2; m++) begin
      automatic int tot = n_camp[m] - n_none[m];
      $display("%s faults: campaigns=%0d detected=%0.1f%% silent=%0.1f%% (wrong output %0d) false_pos=%0.1f%% false_neg=%0.1f%% checker_only_masked=%0.1f%%",
               (m != 0) ? "1-5" : "1", tot, pct(n_det[m], tot), pct(n_sil[m], tot), n_silbad[m],
               pct(n_fp[m], tot), pct(n_fn[m], tot), pct(n_benign[m], tot));
    end
    check(n_ps_single > 0, "no single partial-sum flip corrupted an output");
    check(n_det[0] + n_det[1] > 0, "no fault was ever detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCAMP * 400) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
