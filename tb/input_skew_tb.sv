// input_skew_tb: self-checking test of the input skew at 8 rows: row r of
// the output must equal row r of the input (data, valid, mode) exactly r
// cycles earlier.
`timescale 1ns/1ps
module input_skew_tb;
  import abft_pkg::*;

  localparam int unsigned R = 8;
  localparam int unsigned N = 500;

  logic clk = 0, rst_n, valid_in;
  mode_e mode_in;
  blk_t data_in [R];
  logic valid_out [R];
  mode_e mode_out [R];
  blk_t data_out [R];

  input_skew #(.R(R)) dut (.*);
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  blk_t  hd [N][R];
  logic  hv [N];
  mode_e hm [N];

  initial begin
    rst_n = 0; valid_in = 0; mode_in = MODE_NORMAL;
    for (int r = 0; r < R; r++) data_in[r] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < N; t++) begin
      valid_in = $urandom_range(0, 1);
      mode_in  = mode_e'($urandom_range(0, 1));
      for (int r = 0; r < R; r++) data_in[r] = blk_t'($urandom);
      hv[t] = valid_in; hm[t] = mode_in;
      for (int r = 0; r < R; r++) hd[t][r] = data_in[r];
      #1;
      for (int r = 0; r < R; r++) begin
        if (t >= r) begin
          checks++;
          if (data_out[r] != hd[t-r][r] || valid_out[r] != hv[t-r] || mode_out[r] != hm[t-r]) begin
            failures++; $display("FAIL t=%0d row %0d", t, r);
          end
        end
      end
      @(negedge clk);
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
