// predicted_acc_tb: self-checking test of the predicted-checksum
// accumulator. Sends waves of DIGITS checksum-mode values (least significant
// digit first) mixed with ignored normal-mode and idle cycles; after each wave
// the accumulator must have gained sum_k value_k * 2^(8k), sign-extended, on
// a 48-bit reference.
`timescale 1ns/1ps
module predicted_acc_tb;
  import abft_pkg::*;

  logic clk = 0, rst_n, clr, valid;
  mode_e mode;
  psum_t sum_in;
  chk_t acc;

  predicted_acc dut (.*);
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  longint refv = 0;

  initial begin
    rst_n = 0; clr = 0; valid = 0; mode = MODE_NORMAL; sum_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < 500; w++) begin
      repeat ($urandom_range(0, 3)) begin
        valid = $urandom_range(0, 1); mode = MODE_NORMAL; sum_in = psum_t'($urandom);
        @(negedge clk);
      end
      for (int g = 0; g < DIGITS; g++) begin
        valid = 1; mode = MODE_CHECKSUM; sum_in = psum_t'($urandom);
        refv += longint'(sum_in) * (longint'(1) << (8 * g));
        @(negedge clk);
      end
      valid = 0;
      checks++;
      if (acc != chk_t'(refv)) begin
        failures++; $display("FAIL wave %0d: %0d exp %0d", w, acc, chk_t'(refv));
      end
      if (w == 250) begin
        clr = 1; @(negedge clk); clr = 0; refv = 0;
        checks++;
        if (acc != 0) begin failures++; $display("FAIL: clear"); end
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
