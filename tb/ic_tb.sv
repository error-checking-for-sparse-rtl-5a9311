// ic_tb: self-checking test of the input-checksum block.
// Sends batches of random rows (up to the 256-row limit, including batches
// of all -128 and all +127, the extreme sums), checks that normal mode passes
// the inputs through, then runs the two checksum-digit cycles and checks each
// digit against a signed-digit split of the reference column sum
// (d0 = low byte read as signed, d1 = (sum - d0) / 256) and that the digits
// rebuild the sum. The next batch checks that the accumulators restarted at 0.
`timescale 1ns/1ps
module ic_tb;
  import abft_pkg::*;

  logic clk = 0, rst_n, clr, valid;
  mode_e mode;
  blk_t a_in, a_out;

  ic dut (.*);
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    rst_n = 0; clr = 0; valid = 0; mode = MODE_NORMAL; a_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 12; b++) begin
      automatic int n = (b < 3) ? 256 : $urandom_range(1, 256);
      int sum [BLK];
      int d [DIGITS][BLK];
      for (int k = 0; k < BLK; k++) sum[k] = 0;
      for (int i = 0; i < n; i++) begin
        blk_t a;
        for (int k = 0; k < BLK; k++)
          a[k] = (b == 0) ? data_t'(-128) : (b == 1) ? data_t'(127) : data_t'($urandom);
        // random idle cycle
        if ($urandom_range(0, 9) == 0) begin
          valid = 0; a_in = blk_t'($urandom);
          @(negedge clk);
        end
        valid = 1; mode = MODE_NORMAL; a_in = a;
        #1 check(a_out == a, "pass-through in normal mode");
        for (int k = 0; k < BLK; k++) sum[k] += int'(a[k]);
        @(negedge clk);
      end
      for (int k = 0; k < BLK; k++) begin
        d[0][k] = ((sum[k] + 128) & 255) - 128;
        d[1][k] = (sum[k] - d[0][k]) / 256;
      end
      for (int g = 0; g < DIGITS; g++) begin
        valid = 1; mode = MODE_CHECKSUM; a_in = blk_t'($urandom);
        #1;
        for (int k = 0; k < BLK; k++)
          check(int'(a_out[k]) == d[g][k],
                $sformatf("batch %0d digit %0d lane %0d: %0d exp %0d", b, g, k, a_out[k], d[g][k]));
        @(negedge clk);
      end
      for (int k = 0; k < BLK; k++)
        check(d[0][k] + 256 * d[1][k] == sum[k], "digits rebuild the sum");
      valid = 0; mode = MODE_NORMAL;
      @(negedge clk);
    end
    // clear in the middle of a batch
    valid = 1; a_in = blk_t'({BLK{8'd5}}); @(negedge clk);
    valid = 0; clr = 1; @(negedge clk); clr = 0;
    mode = MODE_CHECKSUM; #1;
    for (int k = 0; k < BLK; k++) check(a_out[k] == 0, "clear");
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
