// actual_acc_tb: self-checking test of the actual-checksum accumulator.
// Random valid/mode/value sequences; only valid normal-mode values must be
// added, sign-extended, to a 48-bit reference. Also checks clear.
`timescale 1ns/1ps
module actual_acc_tb;
  import abft_pkg::*;

  logic clk = 0, rst_n, clr, valid;
  mode_e mode;
  psum_t sum_in;
  chk_t acc;

  actual_acc dut (.*);
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  longint refv = 0;

  initial begin
    rst_n = 0; clr = 0; valid = 0; mode = MODE_NORMAL; sum_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      clr    = ($urandom_range(0, 499) == 0);
      valid  = $urandom_range(0, 3) != 0;
      mode   = mode_e'($urandom_range(0, 3) == 0);
      sum_in = psum_t'($urandom);
      if (clr) refv = 0;
      else if (valid && mode == MODE_NORMAL) refv += longint'(sum_in);
      @(negedge clk);
      checks++;
      if (acc != chk_t'(refv)) begin
        failures++; $display("FAIL @%0d: %0d exp %0d", i, acc, chk_t'(refv));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
