// tb_reconciliation: an Alice and a Bob instance exchange messages through two FIFOs.
// Alice gets random key blocks; Bob gets the same bits with random errors (about 1.5%
// in most blocks, 25% in the last block). Checks: every accepted block comes out on
// both sides equal to Alice's input, the blocks with few errors are accepted, the
// block with many errors is rejected by the CRC on both sides, and Bob's correction
// counter is non-zero.
module tb_reconciliation;
  localparam int LW = 10, L = 1 << LW, NBLK = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_kv, a_kr, a_kb, b_kv, b_kr, b_kb;
  logic ab_v, ab_r, ba_v, ba_r, abq_v, abq_r, baq_v, baq_r;
  logic [15:0] ab_d, ba_d, abq_d, baq_d;
  logic a_ov, b_ov, a_ob, b_ob;
  logic [15:0] a_ok, a_fail, b_ok, b_fail;
  logic [31:0] a_fix, b_fix;
  logic [3:0] a_it, b_it;
  logic [10:0] l1, l2;

  reconciliation #(.LW(LW), .MAX_ITER(6)) u_a (.clk, .rst_n, .is_bob(1'b0), .seg_log2(4'd3),
    .key_in_valid(a_kv), .key_in_ready(a_kr), .key_in_bit(a_kb),
    .msg_in_valid(baq_v), .msg_in_ready(baq_r), .msg_in_data(baq_d),
    .msg_out_valid(ab_v), .msg_out_ready(ab_r), .msg_out_data(ab_d),
    .key_out_valid(a_ov), .key_out_ready(1'b1), .key_out_bit(a_ob),
    .blocks_ok(a_ok), .blocks_fail(a_fail), .bits_fixed(a_fix), .last_iters(a_it));
  reconciliation #(.LW(LW), .MAX_ITER(6)) u_b (.clk, .rst_n, .is_bob(1'b1), .seg_log2(4'd3),
    .key_in_valid(b_kv), .key_in_ready(b_kr), .key_in_bit(b_kb),
    .msg_in_valid(abq_v), .msg_in_ready(abq_r), .msg_in_data(abq_d),
    .msg_out_valid(ba_v), .msg_out_ready(ba_r), .msg_out_data(ba_d),
    .key_out_valid(b_ov), .key_out_ready(1'b1), .key_out_bit(b_ob),
    .blocks_ok(b_ok), .blocks_fail(b_fail), .bits_fixed(b_fix), .last_iters(b_it));
  fifo #(.WIDTH(16), .DEPTH(1024)) u_ab (.clk, .rst_n, .in_valid(ab_v), .in_ready(ab_r), .in_data(ab_d),
    .out_valid(abq_v), .out_ready(abq_r), .out_data(abq_d), .level(l1));
  fifo #(.WIDTH(16), .DEPTH(1024)) u_ba (.clk, .rst_n, .in_valid(ba_v), .in_ready(ba_r), .in_data(ba_d),
    .out_valid(baq_v), .out_ready(baq_r), .out_data(baq_d), .level(l2));

  bit akey[$], bkey[$], aout[$], bout[$];

  always @(posedge clk) if (rst_n) begin
    if (a_ov) aout.push_back(a_ob);
    if (b_ov) bout.push_back(b_ob);
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // independent feeders
  initial begin
    a_kv = 0; a_kb = 0;
    wait (rst_n);
    foreach (akey[i]) begin
      @(negedge clk); a_kv = 1; a_kb = akey[i];
      @(posedge clk); while (!a_kr) @(posedge clk);
    end
    @(negedge clk); a_kv = 0;
  end
  initial begin
    b_kv = 0; b_kb = 0;
    wait (rst_n);
    foreach (bkey[i]) begin
      @(negedge clk); b_kv = 1; b_kb = bkey[i];
      @(posedge clk); while (!b_kr) @(posedge clk);
    end
    @(negedge clk); b_kv = 0;
  end

  initial begin
    int nerr;
    nerr = 0;
    for (int k = 0; k < NBLK * L; k++) begin
      bit b, e;
      b = 1'($urandom);
      e = (k / L == NBLK - 1) ? (($urandom % 4) == 0) : (($urandom % 64) == 0);
      akey.push_back(b); bkey.push_back(b ^ e);
      nerr += e;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (a_ok + a_fail == NBLK && b_ok + b_fail == NBLK);
    repeat (5) @(posedge clk);
    checks++;
    if (a_ok != NBLK - 1 || b_ok != NBLK - 1 || a_fail != 1 || b_fail != 1) begin
      failures++; $display("FAIL ok %0d/%0d fail %0d/%0d", a_ok, b_ok, a_fail, b_fail);
    end
    checks++;
    if (aout.size() != (NBLK - 1) * L || bout.size() != (NBLK - 1) * L) begin
      failures++; $display("FAIL output sizes %0d %0d", aout.size(), bout.size());
    end
    for (int k = 0; k < (NBLK - 1) * L && k < aout.size() && k < bout.size(); k++) begin
      checks++;
      if (aout[k] != akey[k] || bout[k] != akey[k]) begin
        failures++;
        if (failures < 10) $display("FAIL bit %0d a=%b b=%b ref=%b", k, aout[k], bout[k], akey[k]);
      end
    end
    checks++;
    if (b_fix == 0) begin failures++; $display("FAIL no corrections"); end
    $display("errors injected %0d, corrected %0d, iterations of last block %0d", nerr, b_fix, b_it);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
