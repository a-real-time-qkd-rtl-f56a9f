// code_store: SRAM controller for the per-pulse coding data.
//
// Every pulse slot produces a 4-bit code (Alice: class and polarization; Bob: his
// detection). The paper writes the coding data into external SRAM at 20 M codes/s
// x 4 bits = 80 Mbit/s, reads it back at random addresses for sifting, and uses two
// 16 Mbit SRAMs (2 M x 16 bit). Here four consecutive codes are packed into one
// 16-bit word (code of position p in bits [4*(p%4)+:4]) and the word address is
// {frame[AW-9:0], pos[9:2]}: 256 words per frame, so the two SRAMs hold the last
// 8192 frames (about 0.42 s at 20 MHz) as a ring buffer. Packing and addressing are
// this design's choice.
// Arbitration: a completed word is written in the next free SRAM cycle with priority;
// reads use the remaining cycles (at least three of every four at full pulse rate).
// Read port: rd_req with frame/pos is accepted when rd_ready; rd_ack with the 4-bit
// code follows two or more cycles later. SRAM pins follow a synchronous model of the
// chip: address and we_n/oe_n in cycle t, read data on sram_dq_i in cycle t+1.
module code_store
  import qkd_pkg::*;
#(
  parameter int unsigned AW = 21    // word address bits: two 16 Mbit SRAMs = 2 M words
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_valid,
  input  code_t              wr_code,
  input  logic [POS_W-1:0]   wr_pos,
  input  logic [FRAME_W-1:0] wr_frame,
  input  logic               rd_req,
  output logic               rd_ready,
  input  logic [POS_W-1:0]   rd_pos,
  input  logic [FRAME_W-1:0] rd_frame,
  output logic               rd_ack,
  output code_t              rd_code,
  // SRAM pins
  output logic [AW-1:0]      sram_addr,
  output logic [15:0]        sram_dq_o,
  input  logic [15:0]        sram_dq_i,
  output logic               sram_we_n,
  output logic               sram_oe_n,
  output logic               sram_ce_n,
  output logic [15:0]        wr_overrun    // a word completed while one was still pending
);
  localparam int unsigned FB = AW - (POS_W - 2);

  logic [15:0]   wbuf;
  logic          wpend;
  logic [AW-1:0] waddr;
  logic [15:0]   wdata;
  logic          rpend, rissue;
  logic [AW-1:0] raddr;
  logic [1:0]    rsel, rsel_q;
  logic [15:0]   wbuf_n;

  always_comb begin
    wbuf_n = wbuf;
    wbuf_n[4*wr_pos[1:0] +: 4] = wr_code;
  end

  assign rd_ready  = !rpend;
  // SRAM pins: a pending write wins, else a pending read is issued.
  assign sram_ce_n = !(wpend || rpend);
  assign sram_we_n = !wpend;
  assign sram_oe_n = wpend || !rpend;
  assign sram_addr = wpend ? waddr : raddr;
  assign sram_dq_o = wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbuf <= '0; wpend <= 1'b0; waddr <= '0; wdata <= '0;
      rpend <= 1'b0; rissue <= 1'b0; raddr <= '0; rsel <= '0; rsel_q <= '0;
      rd_ack <= 1'b0; rd_code <= '0; wr_overrun <= '0;
    end else begin
      // write side
      if (wpend) wpend <= 1'b0;
      if (wr_valid) begin
        wbuf <= wbuf_n;
        if (wr_pos[1:0] == 2'd3 || wr_pos == POS_W'(K_SLOTS - 1)) begin
          if (wpend) wr_overrun <= wr_overrun + 1'b1;
          wpend <= 1'b1;
          waddr <= {wr_frame[FB-1:0], wr_pos[POS_W-1:2]};
          wdata <= wbuf_n;
          wbuf  <= '0;
        end
      end
      // read side
      rissue <= 1'b0;
      rd_ack <= 1'b0;
      if (rd_req && rd_ready) begin
        rpend <= 1'b1;
        raddr <= {rd_frame[FB-1:0], rd_pos[POS_W-1:2]};
        rsel  <= rd_pos[1:0];
      end
      if (rpend && !wpend) begin
        rpend  <= 1'b0;
        rissue <= 1'b1;
        rsel_q <= rsel;
      end
      if (rissue) begin
        rd_ack  <= 1'b1;
        rd_code <= code_t'(sram_dq_i[4*rsel_q +: 4]);
      end
    end
  end
endmodule
