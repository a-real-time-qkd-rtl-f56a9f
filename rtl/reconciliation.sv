// reconciliation: Hamming-code error correction of the sifted key (one side).
//
// The paper's reconciliation, built on the Winnow protocol, works on a block of sifted
// key in iterations. In each iteration the block is cut into segments of the current
// length, both sides compute the parity of every segment and, where the parities
// differ, a Hamming code locates and corrects the error; between iterations the key is
// permuted; when no segment differs or the maximum number of iterations is reached a
// CRC of the whole block is compared, and the block is accepted if it agrees. The
// paper's figure splits this into an interface module with FIFOs and three units:
// parity comparison (ec_parity), Hamming code (ec_hamming) and permutation
// (ec_permute); crc32 adds the final check. This module is the interface/controller.
//
// Message flow, this design's choice where the paper is silent: per segment Alice
// sends one word {parity, syndrome[14:0]}; Bob corrects locally if the parity differs,
// and after the last segment of the iteration answers with his mismatch count, so
// there is one round trip per iteration. Segment length of iteration t is
// 2**(seg_log2 + t), capped at the block length; seg_log2 is set by software from the
// error rate (the paper: "the length is a given value which is related to the error
// rate"). The CRC exchange is Alice's CRC (two words), Bob's answer {15'b0, ok}. A
// block that fails the CRC is discarded. Block length L = 2**LW and MAX_ITER are this
// design's choice. One key bit is read per clock, so one iteration takes about L
// clocks plus the message latency.
module reconciliation #(
  parameter int unsigned LW       = 12,   // block length L = 2**LW bits
  parameter int unsigned MAX_ITER = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        is_bob,
  input  logic [3:0]  seg_log2,
  // sifted key in
  input  logic        key_in_valid,
  output logic        key_in_ready,
  input  logic        key_in_bit,
  // messages from / to the other side
  input  logic        msg_in_valid,
  output logic        msg_in_ready,
  input  logic [15:0] msg_in_data,
  output logic        msg_out_valid,
  input  logic        msg_out_ready,
  output logic [15:0] msg_out_data,
  // corrected key out
  output logic        key_out_valid,
  input  logic        key_out_ready,
  output logic        key_out_bit,
  // status
  output logic [15:0] blocks_ok,
  output logic [15:0] blocks_fail,
  output logic [31:0] bits_fixed,
  output logic [3:0]  last_iters
);
  localparam int unsigned L = 1 << LW;

  typedef enum logic [3:0] {
    E_FILL, E_ITER, E_SCAN, E_SEG, E_REPLY, E_DECIDE,
    E_CRC, E_CRC_X1, E_CRC_X2, E_CRC_X3, E_OUT
  } estate_e;

  estate_e      st;
  logic         mem [L];
  logic [LW:0]  wcnt;
  logic [LW:0]  j;          // bit index inside segment / scan counter
  logic [LW:0]  seg;        // segment number
  logic [3:0]   r;          // log2 of segment length
  logic [3:0]   iter;
  logic [15:0]  mism;
  logic [31:0]  crc_rx;
  logic         crc_ok;
  logic         seg_done;

  // a segment is finished when its message has been exchanged
  always_comb begin
    if (!is_bob) seg_done = (st == E_SEG) && msg_out_ready;
    else         seg_done = (st == E_SEG) && msg_in_valid;
  end

  // datapath units
  logic          p_clr, p_en, parity, p_mis;
  logic [LW-1:0] synd, err_idx, perm_idx, perm_addr, seg_base, in_seg;
  logic          perm_restart, perm_next;
  logic          crc_clr, crc_en;
  logic [31:0]   crc;
  logic          rbit;

  ec_parity u_par (.clk, .rst_n, .clr(p_clr), .en(p_en), .din(rbit),
                   .other(msg_in_data[15]), .parity, .mismatch(p_mis));
  ec_hamming #(.W(LW)) u_ham (.clk, .rst_n, .clr(p_clr), .en(p_en), .din(rbit),
                   .idx(in_seg), .other(msg_in_data[LW-1:0]), .synd, .err_idx);
  ec_permute #(.LW(LW)) u_perm (.clk, .rst_n, .restart(perm_restart), .next(perm_next),
                   .idx(perm_idx), .addr(perm_addr));
  crc32 u_crc (.clk, .rst_n, .clr(crc_clr), .en(crc_en), .din(mem[j[LW-1:0]]), .crc);

  always_comb begin
    seg_base = LW'(seg << r);
    in_seg   = LW'(j) & LW'((1 << r) - 1);
    perm_idx = (st == E_SEG) ? (seg_base | (err_idx & LW'((1 << r) - 1))) : (seg_base | in_seg);
    rbit     = mem[perm_addr];
    p_en     = (st == E_SCAN);
    p_clr    = (st == E_ITER) || (st == E_SEG && seg_done);
    crc_en   = (st == E_CRC);
  end

  assign key_in_ready  = (st == E_FILL);
  assign key_out_valid = (st == E_OUT) && crc_ok;
  assign key_out_bit   = mem[j[LW-1:0]];

  always_comb begin
    msg_out_valid = 1'b0;
    msg_out_data  = '0;
    msg_in_ready  = 1'b0;
    unique case (st)
      E_SEG: begin
        if (!is_bob) begin
          msg_out_valid = 1'b1;
          msg_out_data  = {parity, 15'(synd)};
        end else begin
          msg_in_ready = 1'b1;
        end
      end
      E_REPLY: begin
        if (is_bob) begin
          msg_out_valid = 1'b1;
          msg_out_data  = mism;
        end else begin
          msg_in_ready = 1'b1;
        end
      end
      E_CRC_X1, E_CRC_X2: begin
        if (!is_bob) begin
          msg_out_valid = 1'b1;
          msg_out_data  = (st == E_CRC_X1) ? crc[31:16] : crc[15:0];
        end else begin
          msg_in_ready = 1'b1;
        end
      end
      E_CRC_X3: begin
        if (is_bob) begin
          msg_out_valid = 1'b1;
          msg_out_data  = {15'd0, crc_rx == crc};
        end else begin
          msg_in_ready = 1'b1;
        end
      end
      default: ;
    endcase
  end

  logic msg_xfer;
  assign msg_xfer = (msg_out_valid && msg_out_ready) || (msg_in_valid && msg_in_ready);

  always_comb begin
    perm_restart = (st == E_FILL);
    perm_next    = (st == E_DECIDE) && !(mism == 16'd0 || iter == 4'(MAX_ITER - 1));
  end

  always_ff @(posedge clk) begin
    if (st == E_FILL && key_in_valid) mem[wcnt[LW-1:0]] <= key_in_bit;
    // Bob flips the located bit of a segment whose parity differs
    if (st == E_SEG && is_bob && msg_in_valid && p_mis) mem[perm_addr] <= !mem[perm_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= E_FILL; wcnt <= '0; j <= '0; seg <= '0; r <= '0; iter <= '0; mism <= '0;
      crc_rx <= '0; crc_ok <= 1'b0; crc_clr <= 1'b1;
      blocks_ok <= '0; blocks_fail <= '0; bits_fixed <= '0; last_iters <= '0;
    end else begin
      crc_clr <= 1'b0;
      unique case (st)
        E_FILL: if (key_in_valid) begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == (LW+1)'(L - 1)) begin
            wcnt <= '0;
            iter <= '0;
            st   <= E_ITER;
          end
        end
        E_ITER: begin
          r    <= ((seg_log2 + iter) > 4'(LW)) ? 4'(LW) : seg_log2 + iter;
          seg  <= '0;
          j    <= '0;
          mism <= '0;
          st   <= E_SCAN;
        end
        E_SCAN: begin
          j <= j + 1'b1;
          if (in_seg == LW'((1 << r) - 1)) st <= E_SEG;
        end
        E_SEG: if (seg_done) begin
          if (is_bob) begin
            if (p_mis) begin
              if (mism != 16'hffff) mism <= mism + 1'b1;
              bits_fixed <= bits_fixed + 1'b1;
            end
          end
          j <= '0;
          if (seg == (LW+1)'((L >> r) - 1)) st <= E_REPLY;
          else begin
            seg <= seg + 1'b1;
            st  <= E_SCAN;
          end
        end
        E_REPLY: if (msg_xfer) begin
          if (!is_bob) mism <= msg_in_data;
          st <= E_DECIDE;
        end
        E_DECIDE: begin
          if (mism == 16'd0 || iter == 4'(MAX_ITER - 1)) begin
            last_iters <= iter + 1'b1;
            j       <= '0;
            crc_clr <= 1'b1;
            st      <= E_CRC;
          end else begin
            iter <= iter + 1'b1;
            st   <= E_ITER;
          end
        end
        E_CRC: begin
          j <= j + 1'b1;
          if (j == (LW+1)'(L - 1)) st <= E_CRC_X1;
        end
        E_CRC_X1: if (msg_xfer) begin
          crc_rx[31:16] <= msg_in_data;
          st <= E_CRC_X2;
        end
        E_CRC_X2: if (msg_xfer) begin
          crc_rx[15:0] <= msg_in_data;
          st <= E_CRC_X3;
        end
        E_CRC_X3: if (msg_xfer) begin
          crc_ok <= is_bob ? (crc_rx == crc) : msg_in_data[0];
          j      <= '0;
          st     <= E_OUT;
          if (is_bob ? (crc_rx == crc) : msg_in_data[0]) blocks_ok <= blocks_ok + 1'b1;
          else                                           blocks_fail <= blocks_fail + 1'b1;
        end
        E_OUT: begin
          if (!crc_ok || key_out_ready) j <= j + 1'b1;
          if (!crc_ok || (key_out_ready && j == (LW+1)'(L - 1))) begin
            j  <= '0;
            st <= E_FILL;
          end
        end
        default: st <= E_FILL;
      endcase
    end
  end
endmodule
