// tb_cmd_proc: sends a mix of register-write packets, error-correction packets and an
// unknown packet type through cmd_proc, with back-pressure on the EC side; checks the
// EC payload comes out in order and each register holds the last value written.
// Packet format and register map are this design's own (see cmd_proc); the test
// checks each register value, the forwarded EC words in order and the bad-packet count.
module tb_cmd_proc;
  import qkd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, ec_valid, ec_ready, run;
  logic [15:0] in_data, ec_data, sfactor, bad_packets;
  logic [1:0] test_light;
  logic pol_req, pol_mode;
  logic signed [7:0] offset;
  logic [3:0] seg_log2;
  logic [63:0] seed;
  logic [7:0] delay;
  logic [15:0] words[$], exp_ec[$], got_ec[$];
  logic [15:0] regs [9];

  cmd_proc dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && ec_valid && ec_ready) got_ec.push_back(ec_data);

  initial begin
    in_valid = 0; in_data = 0; ec_ready = 0;
    for (int i = 0; i < 9; i++) regs[i] = 16'hffff;
    for (int p = 0; p < 60; p++) begin
      int k;
      k = $urandom % 3;
      if (k == 0) begin
        int n;
        n = 1 + $urandom % 20;
        words.push_back({PKT_EC, 12'(n)});
        for (int i = 0; i < n; i++) begin logic [15:0] w; w = 16'($urandom); words.push_back(w); exp_ec.push_back(w); end
      end else if (k == 1) begin
        int n;
        n = 1 + $urandom % 4;
        words.push_back({PKT_REG, 12'(2 * n)});
        for (int i = 0; i < n; i++) begin
          int a; logic [15:0] d;
          a = $urandom % 9; d = 16'($urandom);
          words.push_back(16'(a)); words.push_back(d); regs[a] = d;
        end
      end else begin
        words.push_back({4'h7, 12'd3});
        words.push_back(16'h0000); words.push_back(16'h1234); words.push_back(16'h0001);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (words[i]) begin
      @(negedge clk);
      in_valid = 1; in_data = words[i];
      ec_ready = ($urandom % 3) != 0;
      @(posedge clk);
      while (!in_ready) begin @(negedge clk); ec_ready = ($urandom % 3) != 0; @(posedge clk); end
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (got_ec != exp_ec) begin failures++; $display("FAIL ec payload %0d/%0d", got_ec.size(), exp_ec.size()); end
    checks++;
    if ((regs[0] != 16'hffff && (run != regs[0][0] || test_light != regs[0][2:1] ||
                                  pol_req != regs[0][3] || pol_mode != regs[0][4])) ||
        (regs[1] != 16'hffff && offset != signed'(regs[1][7:0])) ||
        (regs[2] != 16'hffff && seg_log2 != regs[2][3:0]) ||
        (regs[3] != 16'hffff && sfactor != regs[3]) ||
        (regs[4] != 16'hffff && seed[15:0] != regs[4]) ||
        (regs[7] != 16'hffff && seed[63:48] != regs[7]) ||
        (regs[8] != 16'hffff && delay != regs[8][7:0])) begin
      failures++; $display("FAIL registers");
    end
    checks++;
    if (bad_packets == 0) begin failures++; $display("FAIL unknown packets not counted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
