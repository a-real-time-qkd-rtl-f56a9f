// tb_privacy_amp: four units of n = 1000 bits (25 key blocks, the last one partial)
// with SFactor 0.3. The diagonal values t are regenerated here from the seed with a
// separate xorshift implementation and the final key is computed as the plain
// Toeplitz product out[r] = XOR_c t[r - c + n' - 1] & key[c]; every output bit, the
// bit counts, and the multiplication time of exactly 4 * ceil(m/40) * ceil(n/40)
// clocks are checked. Units 2 and 3 are sent back to back, and unit 3 must be taken
// in without a stall while unit 2 is multiplied.
module tb_privacy_amp;
  localparam int N = 1000, BLK = 40, NB = (N + BLK - 1) / BLK, NP = NB * BLK;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [15:0] sfactor = 16'd19661;    // 0.3 in Q0.16
  logic [63:0] seed = 64'h0123_4567_89AB_CDEF;
  logic key_valid, key_ready, key_bit, fk_valid, busy;
  logic [BLK-1:0] fk_data;
  logic [5:0] fk_bits;
  logic [31:0] last_mul_cycles;
  logic [15:0] units_done;
  bit key [N];
  bit fk [$];

  privacy_amp #(.N_BITS(N), .BLK(BLK)) dut (.*);

  always @(posedge clk) if (rst_n && fk_valid)
    for (int i = 0; i < fk_bits; i++) fk.push_back(fk_data[i]);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint unsigned nxt(longint unsigned v);
    v = v ^ (v << 13); v = v ^ (v >> 7); v = v ^ (v << 17);
    return v;
  endfunction

  initial begin
    int m, M;
    key_valid = 0; key_bit = 0;
    m = (N * int'(sfactor)) >> 16;
    M = (m + BLK - 1) / BLK;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int u = 0; u < 4; u++) begin
      bit t [2 * NP];
      longint unsigned x;
      int stalls, base;
      // units 2 and 3 are sent back to back: unit 3 must be taken in while unit 2 is
      // multiplied (two RAM1 banks)
      if (u != 3) fk.delete();
      base = (u == 3) ? m : 0;
      stalls = 0;
      for (int i = 0; i < N; i++) key[i] = 1'($urandom);
      // diagonal values: word w of RAM2 is the low 40 bits of the w-th generator state
      x = seed ^ (longint'(u) * 64'h9E3779B97F4A7C15);
      if (x == 0) x = 1;
      for (int w = 0; w < 2 * NB; w++) begin
        for (int b = 0; b < BLK; b++) t[w * BLK + b] = x[b];
        x = nxt(x);
      end
      for (int i = 0; i < N; i++) begin
        @(negedge clk); key_valid = 1; key_bit = key[i];
        @(posedge clk); while (!key_ready) begin stalls++; @(posedge clk); end
      end
      @(negedge clk); key_valid = 0;
      if (u == 2) continue;
      if (u == 3) begin
        checks++;
        if (stalls != 0) begin failures++; $display("FAIL unit 3 stalled %0d cycles", stalls); end
        $display("unit 3 gathered while unit 2 was multiplied: %0d stall cycles", stalls);
      end
      wait (units_done == 16'(u + 1));
      repeat (3) @(posedge clk);
      checks++;
      if (fk.size() != base + m) begin failures++; $display("FAIL unit %0d: %0d bits, expected %0d", u, fk.size(), base + m); end
      for (int r = 0; r < m && base + r < fk.size(); r++) begin
        bit o;
        o = 0;
        for (int c = 0; c < N; c++) o ^= t[r - c + NP - 1] & key[c];
        checks++;
        if (fk[base + r] != o) begin failures++; if (failures < 10) $display("FAIL unit %0d bit %0d", u, r); end
      end
      checks++;
      if (last_mul_cycles != 32'(4 * M * NB)) begin
        failures++; $display("FAIL cycles %0d expected %0d", last_mul_cycles, 4 * M * NB);
      end
      $display("unit %0d: m=%0d final bits, %0d clocks for %0d x %0d blocks", u, m, last_mul_cycles, M, NB);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
