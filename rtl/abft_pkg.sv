// abft_pkg: types and constants shared by the sparse tensor array and its
// ABFT (algorithm-based fault tolerance) checker.
//
// Widths follow the published configuration: 8-bit signed inputs and
// weights, 24-bit column partial sums and OC adders, 16-bit input-checksum
// accumulators and 48-bit actual/predicted checksum accumulators. Weights are
// N:M structured sparse with M = 4 (block of four rows) and at most N = 2
// non-zeros per block, so every tensor PE holds two weight slots, each a value
// plus a 2-bit index of its row inside the block (the position of a set bit
// in the block's bit mask).
//
// Derived constants: DIGITS = IC_W / DATA_W checksum digits are injected per
// checksum wave, and at most T_ROWS = 2^IC_W / 2^DATA_W rows of A may be
// accumulated before a wave must be injected, so that the 16-bit input
// accumulators never overflow.
package abft_pkg;

  localparam int unsigned DATA_W = 8;   // input / weight width
  localparam int unsigned PSUM_W = 24;  // column partial sum, OC adder width
  localparam int unsigned IC_W   = 16;  // input-checksum accumulator width
  localparam int unsigned CHK_W  = 48;  // actual / predicted checksum width
  localparam int unsigned BLK    = 4;   // M of N:M: inputs per block
  localparam int unsigned NNZ    = 2;   // N of N:M: weight slots per TPE
  localparam int unsigned IDX_W  = $clog2(BLK);
  localparam int unsigned PROD_W = 2 * DATA_W;

  localparam int unsigned DIGITS = IC_W / DATA_W;           // M/N digits
  localparam int unsigned T_ROWS = 1 << (IC_W - DATA_W);    // t = 2^M/2^N

  typedef logic signed [DATA_W-1:0] data_t;
  typedef data_t [BLK-1:0]          blk_t;     // one block of four inputs
  typedef logic signed [PSUM_W-1:0] psum_t;
  typedef logic signed [IC_W-1:0]   icacc_t;
  typedef logic signed [CHK_W-1:0]  chk_t;

  // One stationary weight: its value and its row index inside the block.
  typedef struct packed {
    data_t            w;
    logic [IDX_W-1:0] idx;
  } wslot_t;

  typedef wslot_t [NNZ-1:0] wpair_t;

  // Operating mode of the IC multiplexers and of the checksum accumulators.
  typedef enum logic {
    MODE_NORMAL   = 1'b0,
    MODE_CHECKSUM = 1'b1
  } mode_e;

  // Structured sparsity the array is configured for.
  typedef enum logic {
    SP_2_4 = 1'b0,
    SP_1_4 = 1'b1
  } sparsity_e;

  // Side-band tag that travels with each wave of inputs, used to steer the
  // accumulators and the comparator at the far end of the array.
  typedef struct packed {
    logic  valid;   // a row of A or a checksum digit is in this wave
    mode_e mode;    // normal row or checksum digit
    logic  check;   // last digit of a checksum wave: compare afterwards
    logic  fin;     // last digit of the last wave of the tile
  } tag_t;

endpackage
