// predicted_acc: 48-bit predicted-checksum accumulator (south-east corner).
//
// During a checksum wave the OC chain delivers, one per cycle and least
// significant first, DIGITS sums  P_k = sum_c sum_j d_k[j] * W[j][c],  where
// d_k is digit k of the column checksums of A. The accumulator sign-extends
// each P_k to 48 bits, shifts it left by k * 8 bits and adds it, so that after
// a whole wave it has gained sum_k P_k * 2^(8k) = (sum_i A) * W summed over
// all outputs, which is the predicted checksum of the batch. A digit counter
// tracks k and wraps after DIGITS digits. Normal-mode cycles are ignored.
// Sign extension and shifting are what the paper assigns to this
// accumulator; the counter and the clear input are this design's choices.
//
// Timing: acc is registered; it includes a digit one cycle after it is
// presented.
module predicted_acc
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

  localparam int unsigned DCNT_W = (DIGITS > 1) ? $clog2(DIGITS) : 1;

  logic [DCNT_W-1:0] dcnt;
  chk_t              addend;

  always_comb addend = chk_t'(sum_in) <<< (DATA_W * dcnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      dcnt <= '0;
    end else if (clr) begin
      acc  <= '0;
      dcnt <= '0;
    end else if (valid && mode == MODE_CHECKSUM) begin
      acc  <= acc + addend;
      dcnt <= (dcnt == DCNT_W'(DIGITS - 1)) ? '0 : dcnt + 1'b1;
    end
  end

endmodule
