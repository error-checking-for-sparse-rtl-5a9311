// tpe: tensor processing element of a structured-sparse (2:4 / 1:4)
// weight-stationary systolic array.
//
// Each cycle the TPE receives from the west a block of four consecutive
// elements of one row of A. Two stationary weight slots hold the (up to) two
// non-zero weights of the matching four-row block of one column of W, each
// with its 2-bit row index. Two 4:1 multiplexers pick the inputs named by the
// indexes, two multipliers form the products, and a three-input adder adds
// both to the partial sum arriving from the north. The input block is
// registered and passed east; the sum is registered and passed south. With
// 1:4 sparsity selected only slot 0 is used: the second multiplexer output is
// forced to zero so that multiplier stays idle. All of this follows the
// paper's TPE drawing.
//
// Weight loading (this design's choice, the paper only says weights are
// loaded in a separate phase): while w_load is high the slots take w_in from
// the north and present their old contents on w_out to the TPE below, so a
// column of TPEs forms a shift register.
//
// Timing: a_out and ps_out are registered, one cycle after a_in / ps_in.
// Reset (asynchronous, active low) clears all registers.
module tpe
  import abft_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  sparsity_e sparsity,
  // weight load chain (north to south)
  input  logic      w_load,
  input  wpair_t    w_in,
  output wpair_t    w_out,
  // horizontal input flow (west to east)
  input  blk_t      a_in,
  output blk_t      a_out,
  // vertical partial-sum flow (north to south)
  input  psum_t     ps_in,
  output psum_t     ps_out
);

  wpair_t w_q;    // stationary weight pair
  blk_t   a_q;    // east-going input register
  psum_t  ps_q;   // south-going partial-sum register
  data_t  sel0, sel1;
  logic signed [PROD_W-1:0] prod0, prod1;
  psum_t  sum;

  always_comb begin
    sel0  = a_in[w_q[0].idx];
    sel1  = (sparsity == SP_1_4) ? data_t'(0) : a_in[w_q[1].idx];
    prod0 = PROD_W'(sel0) * PROD_W'(w_q[0].w);
    prod1 = PROD_W'(sel1) * PROD_W'(w_q[1].w);
    sum   = ps_in + psum_t'(prod0) + psum_t'(prod1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q  <= '0;
      a_q  <= '0;
      ps_q <= '0;
    end else begin
      if (w_load) w_q <= w_in;
      a_q  <= a_in;
      ps_q <= sum;
    end
  end

  assign w_out  = w_q;
  assign a_out  = a_q;
  assign ps_out = ps_q;

endmodule
