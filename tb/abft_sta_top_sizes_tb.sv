// abft_sta_top_sizes_tb: runs the checked array at the two larger sizes the
// design is meant to scale to, 16 x 64 and 32 x 128 TPEs, each through one
// 300-row 2:4 tile (see abft_size_harness), and reports the combined result.
`timescale 1ns/1ps
module abft_sta_top_sizes_tb;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        fin_a, fin_b;
  int unsigned chk_a, chk_b, fail_a, fail_b;

  abft_size_harness #(.R(16), .C(64))  u_a (.clk(clk), .finished(fin_a), .checks(chk_a), .failures(fail_a));
  abft_size_harness #(.R(32), .C(128)) u_b (.clk(clk), .finished(fin_b), .checks(chk_b), .failures(fail_b));

  int cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin
    wait (fin_a && fin_b);
    $display("TB_RESULT checks=%0d failures=%0d", chk_a + chk_b, fail_a + fail_b);
    $finish;
  end

  initial begin
    wait (cycles == 3000);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk_a + chk_b, fail_a + fail_b + 1);
    $finish;
  end

endmodule
