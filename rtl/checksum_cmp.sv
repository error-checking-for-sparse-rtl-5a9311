// checksum_cmp: compares the actual with the predicted checksum.
//
// check is high in the cycle in which the last digit of a checksum wave is
// presented to the accumulators; one cycle later both accumulators cover the
// same rows of A, and this block compares them. chk_valid marks that cycle,
// chk_err is high in it when the checksums differ, and err_flag keeps any
// mismatch until clr. done pulses with the comparison of the last wave of a
// tile (fin). Comparing after every wave, not only at the end of the tile, is
// this design's choice; the paper states only that actual and predicted
// checksums are compared.
module checksum_cmp
  import abft_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic check,
  input  logic fin,
  input  chk_t act,
  input  chk_t pred,
  output logic chk_valid,
  output logic chk_err,
  output logic err_flag,
  output logic done
);

  logic check_q, fin_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      check_q  <= 1'b0;
      fin_q    <= 1'b0;
      err_flag <= 1'b0;
    end else begin
      check_q <= check;
      fin_q   <= fin;
      if (clr)          err_flag <= 1'b0;
      else if (chk_err) err_flag <= 1'b1;
    end
  end

  assign chk_valid = check_q;
  assign chk_err   = check_q && (act != pred);
  assign done      = fin_q;

endmodule
