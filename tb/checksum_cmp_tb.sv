// checksum_cmp_tb: self-checking test of the checksum comparator.
// Pulses check (and sometimes fin) with equal or different checksums and
// checks chk_valid, chk_err, done one cycle later, the sticky err_flag and
// its clear.
`timescale 1ns/1ps
module checksum_cmp_tb;
  import abft_pkg::*;

  logic clk = 0, rst_n, clr, check, fin;
  chk_t act, pred;
  logic chk_valid, chk_err, err_flag, done;

  checksum_cmp dut (.*);
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    bit sticky = 0;
    rst_n = 0; clr = 0; check = 0; fin = 0; act = '0; pred = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      automatic bit differ = ($urandom_range(0, 3) == 0);
      automatic bit c = $urandom_range(0, 1);
      automatic bit f = c && ($urandom_range(0, 3) == 0);
      check = c; fin = f;
      @(negedge clk);
      clr = 0; check = 0; fin = 0;
      act  = chk_t'({$urandom, $urandom});
      pred = differ ? act ^ (chk_t'(1) << $urandom_range(0, CHK_W - 1)) : act;
      #1;
      chk(chk_valid == c, "chk_valid");
      chk(done == f, "done");
      chk(chk_err == (c && differ), "chk_err");
      @(negedge clk);
      if (c && differ) sticky = 1;
      chk(err_flag == sticky, "err_flag sticky");
      if ($urandom_range(0, 9) == 0) begin
        clr = 1; @(negedge clk); clr = 0; sticky = 0;
        chk(err_flag == 0, "err_flag clear");
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
