// actual_acc: 48-bit actual-checksum accumulator (south-east corner).
//
// In normal mode each valid row sum of C leaving the OC chain is
// sign-extended to 48 bits and added, so the register holds the sum of all
// output elements computed since clr. Checksum-mode cycles are ignored.
// Its role, width and mode input follow the paper; the clear input is this
// design's choice.
//
// Timing: acc is registered; it includes an input one cycle after it is
// presented.
module actual_acc
  import abft_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  valid,
  input  mode_e mode,
  input  psum_t sum_in,
  output chk_t  acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                              acc <= '0;
    else if (clr)                            acc <= '0;
    else if (valid && mode == MODE_NORMAL)   acc <= acc + chk_t'(sum_in);
  end

endmodule
