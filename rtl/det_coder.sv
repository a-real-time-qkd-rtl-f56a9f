// det_coder: Bob's detector-signal sampling and coding.
//
// Takes the numbered slot stream from sync_recover. For every slot it forms Bob's
// 4-bit code for storage: a single click on detector H, V, P or N gives
// {CLS_SIGNAL, pol} ("detected"), no click or a multiple click gives {CLS_NONE, 0}.
// For a single click it also emits a 16-bit entry {tag, pos, basis, 0} for the
// classical channel, carrying the basis but not the bit, as the paper's sifting step 1
// requires; the frame heads from sync_recover are passed into the same stream, so the
// stream is 32 bits of head per frame plus 16 bits per detection, as in the paper.
// Discarding multiple clicks is this design's choice (the paper does not discuss
// them); they are counted. The output stream has no back-pressure: a word offered
// while out_ready is low is dropped and counted in overflow.
// Timing: registered, one cycle after the input.
module det_coder
  import qkd_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               slot_valid,
  input  logic [POS_W-1:0]   pos_in,
  input  logic [FRAME_W-1:0] frame_in,
  input  logic [3:0]         clicks,
  input  logic               head_valid,
  input  logic [15:0]        head_word,
  // coding data to storage
  output logic               code_valid,
  output code_t              code,
  output logic [POS_W-1:0]   pos,
  output logic [FRAME_W-1:0] frame,
  // entry stream to the upload FIFO
  output logic               out_valid,
  input  logic               out_ready,
  output logic [15:0]        out_data,
  // statistics
  output logic [31:0]        det_count,
  output logic [31:0]        multi_count,
  output logic [15:0]        overflow
);
  logic       single;
  pol_e       cpol;
  bob_entry_t e;

  always_comb begin
    single = (clicks != 4'b0) && ((clicks & (clicks - 4'd1)) == 4'b0);
    unique case (clicks)
      4'b0010: cpol = POL_V;
      4'b0100: cpol = POL_P;
      4'b1000: cpol = POL_N;
      default: cpol = POL_H;
    endcase
    e = '{tag: TAG_ENTRY, pos: pos_in, basis: cpol[1], rsv: 3'b000};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code_valid <= 1'b0; code <= '0; pos <= '0; frame <= '0;
      out_valid <= 1'b0; out_data <= '0;
      det_count <= '0; multi_count <= '0; overflow <= '0;
    end else begin
      code_valid <= slot_valid;
      code       <= single ? '{cls: CLS_SIGNAL, pol: cpol} : '{cls: CLS_NONE, pol: POL_H};
      pos        <= pos_in;
      frame      <= frame_in;
      out_valid  <= 1'b0;
      if (head_valid) begin
        out_valid <= 1'b1;
        out_data  <= head_word;
      end else if (slot_valid && single) begin
        out_valid <= 1'b1;
        out_data  <= e;
      end
      if (slot_valid && single) det_count <= det_count + 1'b1;
      if (slot_valid && !single && clicks != 4'b0) multi_count <= multi_count + 1'b1;
      if (out_valid && !out_ready) overflow <= overflow + 1'b1;
    end
  end

  a_head_not_in_slot: assert property (@(posedge clk) disable iff (!rst_n)
    !(head_valid && slot_valid));
endmodule
