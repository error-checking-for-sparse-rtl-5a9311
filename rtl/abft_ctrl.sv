// abft_ctrl: sequencer that interleaves rows of A with checksum waves.
//
// After start (which also clears the checker) the controller accepts rows of
// A on a valid/ready handshake and sends each one into the array with a
// normal-mode tag. Normal operation is interrupted (a_ready low) to inject a
// checksum wave of DIGITS digit cycles
//   - when T rows have entered since the last wave (T = 2^IC_W / 2^DATA_W,
//     so the 16-bit input accumulators cannot overflow), and
//   - after the last row of the tile (a_last).
// The last digit of every wave carries the check flag, the last digit of the
// tile's last wave also fin. The controller then waits for tile_done, which
// comes when that wave has reached the checksum comparator, and returns to
// idle. When and why the waves are inserted follows the paper; the state
// machine, the handshake and the tag format are this design's.
//
// Interface: a_valid/a_ready/a_last is a valid/ready stream of rows of A
// (a_last marks the last row of the tile, valid with a_valid). tag is the
// side-band tag of the wave entering the array this cycle (combinational).
// stall is high while a wave interrupts a tile that has rows left.
module abft_ctrl
  import abft_pkg::*;
#(
  parameter int unsigned T = T_ROWS,   // rows per checksum wave, at most
  parameter int unsigned D = DIGITS    // digits per checksum wave
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic a_valid,
  input  logic a_last,
  output logic a_ready,
  output logic clr,
  output tag_t tag,
  output logic busy,
  output logic stall,
  input  logic tile_done
);

  localparam int unsigned ROW_W = $clog2(T + 1);
  localparam int unsigned DIG_W = (D > 1) ? $clog2(D) : 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_CSUM, S_DRAIN} state_e;

  state_e            state;
  logic [ROW_W-1:0]  rows;
  logic [DIG_W-1:0]  dig;
  logic              last_q;
  logic              last_dig;

  assign last_dig = (dig == DIG_W'(D - 1));

  always_comb begin
    a_ready   = (state == S_RUN);
    clr       = (state == S_IDLE) && start;
    busy      = (state != S_IDLE);
    stall     = (state == S_CSUM) && !last_q;
    tag       = '0;
    tag.mode  = MODE_NORMAL;
    case (state)
      S_RUN:  tag.valid = a_valid;
      S_CSUM: begin
        tag.valid = 1'b1;
        tag.mode  = MODE_CHECKSUM;
        tag.check = last_dig;
        tag.fin   = last_dig && last_q;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      rows   <= '0;
      dig    <= '0;
      last_q <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state  <= S_RUN;
          rows   <= '0;
          last_q <= 1'b0;
        end
        S_RUN: if (a_valid) begin
          rows <= rows + 1'b1;
          if (a_last || rows == ROW_W'(T - 1)) begin
            state  <= S_CSUM;
            dig    <= '0;
            last_q <= a_last;
          end
        end
        S_CSUM: begin
          dig <= dig + 1'b1;
          if (last_dig) begin
            rows  <= '0;
            state <= last_q ? S_DRAIN : S_RUN;
          end
        end
        S_DRAIN: if (tile_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A row offered and not taken must stay offered.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           a_valid && !a_ready && state == S_RUN |=> a_valid);
  // At most T rows between two checksum waves.
  rows_max: assert property (@(posedge clk) disable iff (!rst_n)
                             rows <= ROW_W'(T));

endmodule
