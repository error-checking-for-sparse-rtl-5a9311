// oc_tb: self-checking test of one output-checksum cell: the registered
// output must equal the previous cycle's column value plus chain input
// (24-bit wrap-around).
`timescale 1ns/1ps
module oc_tb;
  import abft_pkg::*;

  logic clk = 0, rst_n;
  psum_t col_in, sum_in, sum_out;

  oc dut (.*);
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  initial begin
    rst_n = 0; col_in = '0; sum_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      longint e;
      col_in = psum_t'($urandom); sum_in = psum_t'($urandom);
      if (i % 3 == 0) col_in = col_in >>> 4;
      e = longint'(col_in) + longint'(sum_in);
      @(negedge clk);
      checks++;
      if (sum_out != psum_t'(e)) begin
        failures++; $display("FAIL: %0d exp %0d", sum_out, psum_t'(e));
      end
    end
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
