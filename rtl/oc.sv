// oc: output-checksum cell at the south edge of one array column.
//
// A 24-bit adder adds the column's output to the running sum arriving from
// the OC cell on its west, and a 24-bit register passes the result east. As
// column c delivers row i of C one cycle after column c-1, the chain of
// registered cells lines up by itself: the east-most cell outputs the sum of
// one whole row of C (or, during a checksum wave, of one digit's column
// checksums) per cycle. Adder, register and chaining follow the paper.
//
// Timing: sum_out is registered, one cycle after sum_in / col_in.
module oc
  import abft_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  psum_t col_in,
  input  psum_t sum_in,
  output psum_t sum_out
);

  psum_t sum_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sum_q <= '0;
    else        sum_q <= sum_in + col_in;
  end

  assign sum_out = sum_q;

endmodule
