// input_skew: forms the systolic skew of the west-edge inputs.
//
// Row r of the array receives its block, valid flag and mode r cycles after
// row 0, so that a row of A (or a checksum digit) meets the partial sum it
// belongs to as the sum moves south. Row 0 passes straight through; row r
// goes through a chain of r registers. The skewed arrival pattern is the
// paper's (its WS dataflow figures); building it as register chains at the
// array edge is this design's choice.
module input_skew
  import abft_pkg::*;
#(
  parameter int unsigned R = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  valid_in,
  input  mode_e mode_in,
  input  blk_t  data_in   [R],
  output logic  valid_out [R],
  output mode_e mode_out  [R],
  output blk_t  data_out  [R]
);

  typedef struct packed {
    logic  valid;
    mode_e mode;
    blk_t  data;
  } lane_t;

  assign valid_out[0] = valid_in;
  assign mode_out[0]  = mode_in;
  assign data_out[0]  = data_in[0];

  for (genvar r = 1; r < R; r++) begin : g_row
    lane_t q [r];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < r; k++) q[k] <= '0;
      end else begin
        q[0] <= '{valid: valid_in, mode: mode_in, data: data_in[r]};
        for (int k = 1; k < r; k++) q[k] <= q[k-1];
      end
    end
    assign valid_out[r] = q[r-1].valid;
    assign mode_out[r]  = q[r-1].mode;
    assign data_out[r]  = q[r-1].data;
  end

endmodule
