// trng: digital part of one jitter-based true random number generator.
//
// The paper's TRNG samples several high-frequency clocks whose jitter comes from
// thermal noise, samples them many times and post-processes to remove bias, giving
// 20 Mbit/s from one generator (one bit per 20 MHz system clock); five of them feed
// one QKD system. The oscillators themselves are analog behaviour of the FPGA fabric
// and are outside this module: raw[] carries SAMPLES asynchronous samples taken from
// them. Here each raw line passes a two-flop synchronizer, the SAMPLES bits of one
// clock are XOR-folded into one bit (the bias of an XOR of k independent bits with
// bias e is 2**(k-1)*e**k), and the result is registered. How the paper corrects the
// bias is not given; the XOR fold is this design's choice because it keeps the fixed
// one-bit-per-clock rate. A repetition monitor flags a stuck source (health, this
// design's addition): rep_fail rises when the output repeats REP_LIMIT times.
// Timing: rnd is valid every clock, three cycles after the samples.
module trng #(
  parameter int unsigned SAMPLES   = 8,
  parameter int unsigned REP_LIMIT = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [SAMPLES-1:0] raw,
  output logic               rnd,
  output logic               rep_fail
);
  logic [SAMPLES-1:0] s1, s2;
  logic [$clog2(REP_LIMIT+1)-1:0] run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0; s2 <= '0; rnd <= 1'b0; run <= '0; rep_fail <= 1'b0;
    end else begin
      s1  <= raw;
      s2  <= s1;
      rnd <= ^s2;
      if ((^s2) == rnd) begin
        if (run != $bits(run)'(REP_LIMIT)) run <= run + 1'b1;
      end else begin
        run <= '0;
      end
      rep_fail <= (run == $bits(run)'(REP_LIMIT));
    end
  end
endmodule
