// sifting: BB84 sifting engine, the same logic on Alice's and on Bob's board.
//
// Alice (is_bob = 0), the paper's step 2: she reads Bob's entry stream (frame heads and
// {pos, basis} entries), looks up her own 4-bit code for that frame and position in
// SRAM, and where the bases agree she answers with a reply {pos, class, reveal, bit}
// and keeps the bit as sifted key. Heads are forwarded so the reply stream is framed
// like Bob's. Step 3 on Bob's side (is_bob = 1): he reads Alice's replies, looks up his
// own stored detection for the same location and either keeps his bit as sifted key
// or, where Alice revealed her bit, compares the two and counts errors, separately
// for signal and decoy states, so that software can estimate the error rates.
// Alice reveals every decoy bit and one in ten of the matched signal bits (the paper's
// p1 = 90% of signal data kept, 10% used for error statistics); taking exactly every
// tenth is this design's choice. Only signal bits that were not revealed become key;
// decoy and vacuum slots give none (the paper's p2).
// Rate: the paper processes one detection in at most 20 clocks. Here an entry takes
// about five cycles (SRAM read through code_store plus one cycle to decide); the
// cycles from accepting one entry to being ready for the next are measured on
// last_cycles. Back-pressure: a word is only taken when the reply FIFO and the
// sifted-key FIFO can take the result.
module sifting
  import qkd_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               is_bob,
  // incoming stream (Alice: Bob's entries; Bob: Alice's replies)
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [15:0]        in_data,
  // reply stream (Alice only)
  output logic               out_valid,
  input  logic               out_ready,
  output logic [15:0]        out_data,
  // sifted key bits
  output logic               key_valid,
  input  logic               key_ready,
  output logic               key_bit,
  // read port of code_store
  output logic               rd_req,
  input  logic               rd_ready,
  output logic [POS_W-1:0]   rd_pos,
  output logic [FRAME_W-1:0] rd_frame,
  input  logic               rd_ack,
  input  code_t              rd_code,
  // statistics
  output logic [31:0]        n_entries,
  output logic [31:0]        n_key,
  output logic [31:0]        sig_checked,
  output logic [31:0]        sig_errors,
  output logic [31:0]        dec_checked,
  output logic [31:0]        dec_errors,
  output logic [31:0]        vac_count,
  output logic [7:0]         last_cycles
);
  typedef enum logic [2:0] {S_IDLE, S_HEAD_LO, S_REQ, S_WAIT, S_DONE} state_e;
  state_e             st;
  logic [15:0]        word;
  logic [FRAME_W-1:0] cur_frame;
  logic [3:0]         sample_cnt;
  logic [7:0]         cyc;
  logic               can_emit;

  bob_entry_t   be;
  alice_reply_t ar;
  assign be = bob_entry_t'(word);
  assign ar = alice_reply_t'(word);

  assign can_emit = out_ready && key_ready;
  assign in_ready = can_emit && (st == S_IDLE || st == S_HEAD_LO);
  assign rd_req   = (st == S_REQ);
  assign rd_pos   = is_bob ? ar.pos : be.pos;
  assign rd_frame = cur_frame;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; word <= '0; cur_frame <= '0; sample_cnt <= '0; cyc <= '0;
      out_valid <= 1'b0; out_data <= '0; key_valid <= 1'b0; key_bit <= 1'b0;
      n_entries <= '0; n_key <= '0; sig_checked <= '0; sig_errors <= '0;
      dec_checked <= '0; dec_errors <= '0; vac_count <= '0; last_cycles <= '0;
    end else begin
      out_valid <= 1'b0;
      key_valid <= 1'b0;
      if (cyc != 8'hff) cyc <= cyc + 1'b1;
      unique case (st)
        S_IDLE: if (in_valid && in_ready) begin
          word <= in_data;
          cyc  <= 8'd1;
          if (in_data[15:14] == TAG_HEAD) begin
            cur_frame[FRAME_W-1:16] <= in_data[13:0];
            st <= S_HEAD_LO;
            if (!is_bob) begin out_valid <= 1'b1; out_data <= in_data; end
          end else if (in_data[15:14] == TAG_ENTRY) begin
            st <= S_REQ;
          end
        end
        S_HEAD_LO: if (in_valid && in_ready) begin
          cur_frame[15:0] <= in_data;
          st <= S_IDLE;
          if (!is_bob) begin out_valid <= 1'b1; out_data <= in_data; end
        end
        S_REQ: if (rd_ready) st <= S_WAIT;
        S_WAIT: if (rd_ack) begin
          st <= S_DONE;
          n_entries <= n_entries + 1'b1;
          if (!is_bob) begin
            // Alice: compare bases
            if (rd_code.pol[1] == be.basis) begin
              alice_reply_t r;
              logic rev;
              rev = (rd_code.cls == CLS_DECOY) ||
                    (rd_code.cls == CLS_SIGNAL && sample_cnt == 4'd9);
              if (rd_code.cls == CLS_SIGNAL)
                sample_cnt <= (sample_cnt == 4'd9) ? 4'd0 : sample_cnt + 1'b1;
              r = '{tag: TAG_ENTRY, pos: be.pos, cls: rd_code.cls, reveal: rev,
                    bitv: rev ? rd_code.pol[0] : 1'b0};
              out_valid <= 1'b1;
              out_data  <= r;
              if (rd_code.cls == CLS_SIGNAL && !rev) begin
                key_valid <= 1'b1;
                key_bit   <= rd_code.pol[0];
                n_key     <= n_key + 1'b1;
              end
            end
          end else begin
            // Bob: keep or check his own bit. A key bit is kept for every unrevealed
            // signal reply, even if his own record has no click there (it cannot
            // happen when both sides agree on the numbering), so that both key
            // streams always stay the same length.
            unique case (ar.cls)
              CLS_SIGNAL: if (!ar.reveal) begin
                key_valid <= 1'b1;
                key_bit   <= rd_code.pol[0];
                n_key     <= n_key + 1'b1;
              end else if (rd_code.cls != CLS_NONE) begin
                sig_checked <= sig_checked + 1'b1;
                if (ar.bitv != rd_code.pol[0]) sig_errors <= sig_errors + 1'b1;
              end
              CLS_DECOY: if (rd_code.cls != CLS_NONE) begin
                dec_checked <= dec_checked + 1'b1;
                if (ar.bitv != rd_code.pol[0]) dec_errors <= dec_errors + 1'b1;
              end
              default: vac_count <= vac_count + 1'b1;
            endcase
          end
        end
        S_DONE: begin
          st <= S_IDLE;
          last_cycles <= cyc;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
