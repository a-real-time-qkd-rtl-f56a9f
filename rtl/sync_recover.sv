// sync_recover: Bob's sync frame recovery and bit numbering.
//
// Bob receives the sync pulses (through the synchronization and delay-line board)
// and the four SPD outputs, both aligned to his 20 MHz clock. As the paper
// describes, the position number counts sync pulses and a run of at least N clocks
// without a pulse marks a frame boundary; a pulse lost inside a frame shifts the
// numbering only until the next frame. The first boundary after run rises starts
// frame 0. The signed offset shifts Bob's bit numbering against Alice's (the paper's
// Fig. 6: Bob's pulse count is shifted until the QBER falls from about 50%); slots
// whose shifted number leaves 0..K-1 are dropped.
// The slot stream (slot_valid, pos, frame, clicks) comes out three cycles after the
// input; in the two cycles before the first slot of every frame, head_valid carries
// the two 16-bit halves of the 32-bit frame head (high half first), so the head
// never collides with a slot. Counting pulses (not clocks) and the offset range are
// the paper's; the three-cycle alignment is this design's.
module sync_recover
  import qkd_pkg::*;
#(
  parameter int unsigned K = K_SLOTS,
  parameter int unsigned N = N_GAP
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                run,
  input  logic                sync_in,
  input  logic [3:0]          clicks_in,
  input  logic signed [7:0]   offset,
  output logic                slot_valid,
  output logic [POS_W-1:0]    pos,
  output logic [FRAME_W-1:0]  frame,
  output logic [3:0]          clicks,
  output logic                head_valid,
  output logic [15:0]         head_word,
  output logic [15:0]         lost_frames   // boundaries seen before K pulses were counted
);
  logic [3:0]          zrun;
  logic [POS_W:0]      pcnt;
  logic [FRAME_W-1:0]  fcnt;
  logic                locked;
  logic                pend_lo;
  // three-stage delay of the slot stream
  logic [2:0]                v_d;
  logic [2:0][POS_W-1:0]     p_d;
  logic [2:0][FRAME_W-1:0]   f_d;
  logic [2:0][3:0]           c_d;

  logic                 boundary;
  logic signed [POS_W+1:0] padj;
  assign boundary = sync_in && (zrun >= 4'(N));

  always_comb begin
    if (boundary) padj = $signed({2'b00, POS_W'(0)}) + (POS_W+2)'(offset);
    else          padj = $signed({1'b0, pcnt}) + (POS_W+2)'(1) + (POS_W+2)'(offset);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zrun <= '0; pcnt <= '0; fcnt <= '0; locked <= 1'b0; pend_lo <= 1'b0;
      head_valid <= 1'b0; head_word <= '0; lost_frames <= '0;
      v_d <= '0; p_d <= '0; f_d <= '0; c_d <= '0;
    end else if (!run) begin
      zrun <= '0; locked <= 1'b0; pend_lo <= 1'b0; head_valid <= 1'b0;
      v_d <= '0;
    end else begin
      head_valid <= 1'b0;
      pend_lo    <= 1'b0;
      v_d[0]     <= 1'b0;
      if (pend_lo) begin
        head_valid <= 1'b1;
        head_word  <= head_lo(fcnt);
      end
      if (!sync_in) begin
        if (zrun != 4'hf) zrun <= zrun + 1'b1;
      end else begin
        zrun <= '0;
        if (boundary) begin
          if (locked && pcnt != (POS_W+1)'(K - 1)) lost_frames <= lost_frames + 1'b1;
          pcnt       <= '0;
          fcnt       <= locked ? fcnt + 1'b1 : '0;
          locked     <= 1'b1;
          head_valid <= 1'b1;
          head_word  <= head_hi(locked ? fcnt + 1'b1 : '0);
          pend_lo    <= 1'b1;
        end else if (locked) begin
          pcnt <= pcnt + 1'b1;
        end
        if ((boundary || locked) && padj >= 0 && padj < (POS_W+2)'(K)) begin
          v_d[0] <= 1'b1;
          p_d[0] <= POS_W'(padj);
          f_d[0] <= boundary ? (locked ? fcnt + 1'b1 : '0) : fcnt;
          c_d[0] <= clicks_in;
        end
      end
      v_d[1] <= v_d[0]; p_d[1] <= p_d[0]; f_d[1] <= f_d[0]; c_d[1] <= c_d[0];
      v_d[2] <= v_d[1]; p_d[2] <= p_d[1]; f_d[2] <= f_d[1]; c_d[2] <= c_d[1];
    end
  end

  assign slot_valid = v_d[2];
  assign pos        = p_d[2];
  assign frame      = f_d[2];
  assign clicks     = c_d[2];
endmodule
