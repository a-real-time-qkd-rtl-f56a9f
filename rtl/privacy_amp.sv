// privacy_amp: Toeplitz-matrix privacy amplification with block operation.
//
// As in the paper: corrected key bits are gathered in RAM1 until a unit of n bits
// (N_BITS, 256 Kbit) is complete; pseudo-random numbers fill RAM2 (the paper generates
// them while the key is gathered, here they are generated just before the multiply,
// see below). The final key length is m = floor(n * SFactor), with SFactor from
// software (here an unsigned Q0.16 number, a format this design chose). The m x n Toeplitz matrix T has constant
// diagonals, T[r][c] = t[r - c + n' - 1] with n' = n rounded up to whole blocks, so it
// is stored as its n' + m - 1 diagonal values t in RAM2. The product T * key is done in
// BLK x BLK blocks (the paper uses 40 x 40): for block row I and block column J the 79
// diagonal values needed are bits 40W .. 40W+78 of t with W = I - J + NB - 1, i.e. two
// consecutive 40-bit words of RAM2, and the key block is one 40-bit word of RAM1. Each
// block takes four clocks (read RAM2 word W and RAM1 word J, read RAM2 word W+1,
// capture, multiply-accumulate over GF(2)), as in the paper, so one unit takes
// 4 * ceil(m/40) * ceil(n/40) clocks; with n = 256 Kbit and SFactor 0.3 that is about
// 51.6 M clocks, 1.29 s at 40 MHz (the paper: about 50 M clocks, 1.25 s).
// When block row I is finished its 40 bits are output on fk_data with fk_bits valid
// bits (fewer in the last row). The random numbers come from a 64-bit xorshift
// generator reseeded for every unit from the shared seed and the unit number, so Alice
// and Bob build the same matrix; the generator type and the seeding are this design's.
// RAM1 has two banks: while one unit is multiplied the next is gathered in the other
// bank, so key is refused (key_ready low) only when both banks hold units. RAM2 is
// filled for a unit just before its multiply (2 * ceil(n/40) clocks), which lets one
// RAM2 serve both banks. The paper says only that the multiply is fast enough for the
// incoming key; the two banks are this design's way of making that hold.
module privacy_amp #(
  parameter int unsigned N_BITS = 262144,
  parameter int unsigned BLK    = 40
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [15:0]             sfactor,
  input  logic [63:0]             seed,
  input  logic                    key_valid,
  output logic                    key_ready,
  input  logic                    key_bit,
  output logic                    fk_valid,
  output logic [BLK-1:0]          fk_data,
  output logic [$clog2(BLK+1)-1:0] fk_bits,
  output logic                    busy,
  output logic [31:0]             last_mul_cycles,
  output logic [15:0]             units_done
);
  localparam int unsigned NB  = (N_BITS + BLK - 1) / BLK;   // key blocks (columns)
  localparam int unsigned NW2 = 2 * NB;                      // RAM2 words
  localparam int unsigned AW1 = $clog2(NB);
  localparam int unsigned AW2 = $clog2(NW2);
  localparam int unsigned NW  = $clog2(N_BITS + 1);
  localparam int unsigned BW  = $clog2(BLK);

  typedef enum logic [1:0] {P_IDLE, P_GEN, P_MUL} pstate_e;
  pstate_e st;

  logic [BLK-1:0] ram1 [2*NB];          // two banks of NB words
  logic [BLK-1:0] ram2 [NW2];
  logic [BLK-1:0] ram1_q, ram2_q;
  logic [AW1:0]   ram1_ra;
  logic [AW2-1:0] ram2_ra;

  // fill side
  logic [1:0]     full;                 // bank holds a complete unit
  logic           fb;                   // bank being filled
  logic [NW-1:0]  nbits;
  logic [BW-1:0]  bpos;
  logic [BLK-1:0] sh;
  logic [AW1-1:0] waddr1;
  logic           blk_done, unit_done;
  // generator
  logic [63:0]    x;
  logic [AW2:0]   gcnt;
  logic [15:0]    unit;
  // multiply side
  logic           mb;                   // bank being multiplied
  logic [NW-1:0]  m_bits;
  logic [NW-1:0]  rowbase;
  logic [AW1:0]   I, J;
  logic [1:0]     ph;
  logic [BLK-1:0] t0, t1, kq, acc;
  logic [31:0]    mcyc;

  function automatic logic [63:0] xs(input logic [63:0] v);
    logic [63:0] y;
    y = v ^ (v << 13);
    y = y ^ (y >> 7);
    y = y ^ (y << 17);
    return y;
  endfunction

  function automatic logic [AW1:0] bank_addr(input logic bank, input logic [AW1:0] a);
    return a + (bank ? (AW1+1)'(NB) : (AW1+1)'(0));
  endfunction

  // GF(2) product of one BLK x BLK Toeplitz block with one key block
  function automatic logic [BLK-1:0] blkmul(input logic [2*BLK-2:0] t, input logic [BLK-1:0] k);
    logic [BLK-1:0] o;
    for (int rr = 0; rr < BLK; rr++) begin
      o[rr] = 1'b0;
      for (int cc = 0; cc < BLK; cc++) o[rr] = o[rr] ^ (t[rr - cc + BLK - 1] & k[cc]);
    end
    return o;
  endfunction

  logic [NW+15:0] mprod;
  assign mprod     = (NW+16)'(N_BITS) * (NW+16)'(sfactor);
  assign key_ready = !full[fb];
  assign busy      = (st != P_IDLE);
  assign blk_done  = (bpos == BW'(BLK - 1)) || (nbits == NW'(N_BITS - 1));
  assign unit_done = (nbits == NW'(N_BITS - 1));

  always_comb begin
    ram1_ra = bank_addr(mb, J);
    ram2_ra = AW2'(I - J + (AW1+1)'(NB - 1)) + ((ph == 2'd1) ? AW2'(1) : AW2'(0));
  end

  always_ff @(posedge clk) begin
    ram1_q <= ram1[ram1_ra];
    ram2_q <= ram2[ram2_ra];
    if (key_valid && key_ready && blk_done)
      ram1[bank_addr(fb, (AW1+1)'(waddr1))] <= sh | (BLK'(key_bit) << bpos);
    if (st == P_GEN) ram2[AW2'(gcnt)] <= x[BLK-1:0];
  end

  // fill side: gathers key into bank fb while the other bank may be multiplied
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fb <= 1'b0; nbits <= '0; bpos <= '0; sh <= '0; waddr1 <= '0;
    end else if (key_valid && key_ready) begin
      nbits <= unit_done ? '0 : nbits + 1'b1;
      sh    <= sh | (BLK'(key_bit) << bpos);
      if (blk_done) begin
        bpos   <= '0;
        sh     <= '0;
        waddr1 <= unit_done ? '0 : waddr1 + 1'b1;
      end else begin
        bpos <= bpos + 1'b1;
      end
      if (unit_done) fb <= !fb;
    end
  end

  // multiply side: random numbers for RAM2, then the block products
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; full <= '0; mb <= 1'b0;
      x <= 64'h1; gcnt <= '0; unit <= '0;
      m_bits <= '0; rowbase <= '0; I <= '0; J <= '0; ph <= '0;
      t0 <= '0; t1 <= '0; kq <= '0; acc <= '0; mcyc <= '0;
      fk_valid <= 1'b0; fk_data <= '0; fk_bits <= '0;
      last_mul_cycles <= '0; units_done <= '0;
    end else begin
      fk_valid <= 1'b0;
      if (key_valid && key_ready && unit_done) full[fb] <= 1'b1;
      unique case (st)
        P_IDLE: if (full[mb]) begin
          x    <= ((seed ^ ({48'd0, unit} * 64'h9E3779B97F4A7C15)) == 64'd0) ? 64'h1
                  : (seed ^ ({48'd0, unit} * 64'h9E3779B97F4A7C15));
          gcnt <= '0;
          st   <= P_GEN;
        end
        P_GEN: begin
          x    <= xs(x);
          gcnt <= gcnt + 1'b1;
          if (gcnt == (AW2+1)'(NW2 - 1)) begin
            m_bits  <= NW'(mprod >> 16);
            rowbase <= '0;
            I <= '0; J <= '0; ph <= '0; acc <= '0; mcyc <= '0;
            if ((mprod >> 16) == 0) begin
              st <= P_IDLE; full[mb] <= 1'b0; mb <= !mb; unit <= unit + 1'b1;
              units_done <= units_done + 1'b1;
            end else begin
              st <= P_MUL;
            end
          end
        end
        P_MUL: begin
          mcyc <= mcyc + 1'b1;
          ph   <= ph + 1'b1;
          unique case (ph)
            2'd0: ;                                   // RAM2 word W and RAM1 word J read
            2'd1: begin t0 <= ram2_q; kq <= ram1_q; end // RAM2 word W+1 read
            2'd2: t1 <= ram2_q;
            2'd3: begin
              if (J == (AW1+1)'(NB - 1)) begin
                fk_valid <= 1'b1;
                fk_data  <= acc ^ blkmul({t1[BLK-2:0], t0}, kq);
                fk_bits  <= ((m_bits - rowbase) >= NW'(BLK)) ? $bits(fk_bits)'(BLK)
                                                             : $bits(fk_bits)'(m_bits - rowbase);
                acc      <= '0;
                J        <= '0;
                I        <= I + 1'b1;
                rowbase  <= rowbase + NW'(BLK);
                if (rowbase + NW'(BLK) >= m_bits) begin
                  st              <= P_IDLE;
                  last_mul_cycles <= mcyc + 1'b1;
                  units_done      <= units_done + 1'b1;
                  full[mb]        <= 1'b0;
                  mb              <= !mb;
                  unit            <= unit + 1'b1;
                end
              end else begin
                acc <= acc ^ blkmul({t1[BLK-2:0], t0}, kq);
                J   <= J + 1'b1;
              end
            end
          endcase
        end
        default: st <= P_IDLE;
      endcase
    end
  end
endmodule
