// ic: input-checksum block at the west edge of one TPE row.
//
// Four 16-bit accumulators add up every element of A that enters the row
// (all four, because it is not known in advance which of them the weights of
// the row will select). Four 2:1 multiplexers, steered by mode, pass either
// the incoming block (0: normal) or the accumulated column checksums
// (1: checksum) on to the first TPE. Accumulators and multiplexers follow the
// paper's IC drawing.
//
// Digit-serial injection. A 16-bit checksum cannot pass the 8-bit input of a
// TPE in one cycle, so in checksum mode the block sends one 8-bit digit per
// cycle, least significant digit first, for DIGITS = IC_W / DATA_W cycles.
// This design uses signed digits so that the TPE's signed multipliers need no
// change: each digit is the low byte of the remaining value read as a signed
// number, and the remaining value becomes (value - digit) / 2^8, an exact
// arithmetic shift. Then value = sum_k digit_k * 2^(8k). As long as at most
// T_ROWS = 256 rows were accumulated (sum within [-32768, 32512]) every digit,
// the last included, fits in 8 signed bits, and after the last digit the
// accumulator holds zero, ready for the next batch. The recoding is this
// design's choice; the paper states only that the checksum is cut into 8-bit
// digits and that the far-end accumulator sign-extends and shifts.
//
// Interface: valid marks a cycle carrying a row of A (mode normal) or a
// digit (mode checksum); clr empties the accumulators. a_out is
// combinational from a_in / the accumulators (no register in this block).
module ic
  import abft_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  valid,
  input  mode_e mode,
  input  blk_t  a_in,
  output blk_t  a_out
);

  icacc_t [BLK-1:0] acc;   // packed, so the whole register can be addressed
  icacc_t digit [BLK];
  icacc_t rest  [BLK];

  always_comb begin
    for (int k = 0; k < BLK; k++) begin
      digit[k] = icacc_t'(data_t'(acc[k][DATA_W-1:0]));   // signed low digit
      rest[k]  = (acc[k] - digit[k]) >>> DATA_W;
      a_out[k] = (mode == MODE_CHECKSUM) ? data_t'(acc[k][DATA_W-1:0]) : a_in[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < BLK; k++) acc[k] <= '0;
    end else if (clr) begin
      for (int k = 0; k < BLK; k++) acc[k] <= '0;
    end else if (valid) begin
      for (int k = 0; k < BLK; k++) begin
        if (mode == MODE_NORMAL) acc[k] <= acc[k] + icacc_t'(a_in[k]);
        else                     acc[k] <= rest[k];
      end
    end
  end

endmodule
