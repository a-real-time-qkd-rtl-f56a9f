// tb_trng: test of the TRNG post-processing.
// Feeds random raw samples and checks each output bit is the XOR of the samples three
// clocks earlier; then holds the source stuck and checks the repetition alarm rises,
// and that a biased source (each raw bit 1 with probability 3/4) gives a balanced
// output after the XOR fold.
module tb_trng;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] raw;
  logic rnd, rep_fail;
  logic [7:0] hist[$];
  int ones;

  trng #(.SAMPLES(8), .REP_LIMIT(64)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raw = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      raw = 8'($urandom);
      hist.push_back(raw);
      if (hist.size() > 3) begin
        checks++;
        if (rnd != ^hist[hist.size()-4]) begin failures++; $display("FAIL bit %0d", i); end
        if (rep_fail) begin failures++; $display("FAIL false alarm"); end
      end
    end
    // stuck source
    for (int i = 0; i < 80; i++) begin @(negedge clk); raw = 8'h0F; end
    checks++;
    if (!rep_fail) begin failures++; $display("FAIL no repetition alarm"); end
    // biased source
    ones = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      for (int b = 0; b < 8; b++) raw[b] = ($urandom % 4) != 0;
      ones += rnd;
    end
    checks++;
    if (ones < 1800 || ones > 2200) begin failures++; $display("FAIL bias ones=%0d", ones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
