// tpe_tb: self-checking test of one tensor PE.
// Loads random weight pairs, drives random input blocks and partial sums in
// both sparsity modes and checks, one cycle later, the registered east
// output (the input block), the south output (partial sum plus the selected
// products, the second one only in 2:4 mode) and the weight chain output.
`timescale 1ns/1ps
module tpe_tb;
  import abft_pkg::*;

  logic clk = 0, rst_n;
  sparsity_e sparsity;
  logic w_load;
  wpair_t w_in, w_out;
  blk_t a_in, a_out;
  psum_t ps_in, ps_out;

  tpe dut (.*);
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  wpair_t wref;
  initial begin
    rst_n = 0; sparsity = SP_2_4; w_load = 0; w_in = '0; a_in = '0; ps_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      blk_t a; psum_t p; longint e;
      if (it % 50 == 0) begin
        wref[0] = '{w: data_t'($urandom), idx: IDX_W'($urandom)};
        wref[1] = '{w: data_t'($urandom), idx: IDX_W'($urandom)};
        w_in = wref; w_load = 1;
        @(negedge clk);
        w_load = 0; w_in = '0;
        check(w_out == wref, "weight load");
        sparsity = (it % 100 == 0) ? SP_2_4 : SP_1_4;
      end
      for (int k = 0; k < BLK; k++) a[k] = data_t'($urandom);
      p = psum_t'($urandom);
      a_in = a; ps_in = p;
      e = longint'(p) + longint'(a[wref[0].idx]) * longint'(wref[0].w);
      if (sparsity == SP_2_4) e += longint'(a[wref[1].idx]) * longint'(wref[1].w);
      @(negedge clk);
      check(a_out == a, "east output");
      check(ps_out == psum_t'(e), $sformatf("psum %0d exp %0d", ps_out, psum_t'(e)));
      check(w_out == wref, "weights held");
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
