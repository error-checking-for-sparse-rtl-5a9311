// abft_ctrl_tb: self-checking test of the sequencer at its default sizes
// (T = 256 rows per wave, 2 digits).
// Streams tiles of various lengths with random bubbles and checks, cycle by
// cycle, against an independent count: rows are taken only in the run state,
// a two-cycle checksum wave follows every 256th row and the last row, the
// check flag sits on the last digit, fin only on the tile's last wave, stall
// only on waves that interrupt the tile, and the controller stays busy until
// tile_done.
`timescale 1ns/1ps
module abft_ctrl_tb;
  import abft_pkg::*;

  logic clk = 0, rst_n, start, a_valid, a_last, a_ready, clr, busy, stall, tile_done;
  tag_t tag;

  abft_ctrl dut (.*);
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_stall = 0;

  task automatic run_tile(input int n);
    int sent = 0, since = 0;
    start = 1; #1;
    check(clr && !a_ready, "clr on start");
    @(negedge clk);
    start = 0;
    while (sent < n) begin
      a_valid = ($urandom_range(0, 4) != 0);
      a_last  = (sent == n - 1);
      #1;
      check(a_ready && busy, "ready in run");
      check(tag.valid == a_valid && tag.mode == MODE_NORMAL && !tag.check, "normal tag");
      @(negedge clk);
      if (a_valid) begin
        sent++; since++;
        if (since == T_ROWS || sent == n) begin
          a_valid = 1;   // offered but must not be taken
          for (int g = 0; g < DIGITS; g++) begin
            #1;
            check(!a_ready, "not ready during wave");
            check(tag.valid && tag.mode == MODE_CHECKSUM, "checksum tag");
            check(tag.check == (g == DIGITS - 1), "check on last digit");
            check(tag.fin == (g == DIGITS - 1 && sent == n), "fin on last wave");
            check(stall == (sent != n), "stall only mid-tile");
            if (stall) n_stall++;
            @(negedge clk);
          end
          since = 0;
        end
      end
    end
    a_valid = 0; a_last = 0;
    repeat (5) begin
      #1 check(busy && !a_ready && !tag.valid, "drain");
      @(negedge clk);
    end
    tile_done = 1; @(negedge clk); tile_done = 0;
    #1 check(!busy, "idle after tile_done");
    @(negedge clk);
  endtask

  initial begin
    rst_n = 0; start = 0; a_valid = 0; a_last = 0; tile_done = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1 check(!busy && !a_ready, "idle after reset");
    @(negedge clk);
    run_tile(1);
    run_tile(17);
    run_tile(256);
    run_tile(257);
    run_tile(600);
    check(n_stall == 3 * DIGITS, $sformatf("stall cycles %0d", n_stall));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
