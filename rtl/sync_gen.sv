// sync_gen: Alice's sync-signal and frame generator.
//
// Following the paper, the sync signal runs on the 20 MHz system clock, the same
// rate as the photon pulses. A frame is K pulse clocks plus N clocks without a sync
// pulse (K = 1018, N = 6), so Bob can find the frame boundary by the run of N missing
// pulses and both sides count the same frames. This module counts the N gap clocks
// first and then the K pulse clocks; the numbering gives every pulse its location
// (frame number, position 0..K-1), which is stored with the coding data.
// That the gap comes first, and the frame numbering from 0 after run rises, are this
// design's choices. Outputs are registered: sync_out is high in the clock of each
// pulse slot, together with slot_valid, pos and frame.
module sync_gen
  import qkd_pkg::*;
#(
  parameter int unsigned K = K_SLOTS,
  parameter int unsigned N = N_GAP
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               run,
  output logic               sync_out,
  output logic               slot_valid,
  output logic [POS_W-1:0]   pos,
  output logic [FRAME_W-1:0] frame
);
  localparam int unsigned CW = $clog2(K + N);
  logic [CW-1:0]      cnt;
  logic [FRAME_W-1:0] fcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; fcnt <= '0;
      sync_out <= 1'b0; slot_valid <= 1'b0; pos <= '0; frame <= '0;
    end else if (!run) begin
      cnt <= '0; fcnt <= '0;
      sync_out <= 1'b0; slot_valid <= 1'b0;
    end else begin
      slot_valid <= (cnt >= CW'(N));
      sync_out   <= (cnt >= CW'(N));
      pos        <= POS_W'(cnt - CW'(N));
      frame      <= fcnt;
      if (cnt == CW'(K + N - 1)) begin
        cnt  <= '0;
        fcnt <= fcnt + 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
