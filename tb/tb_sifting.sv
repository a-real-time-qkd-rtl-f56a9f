// tb_sifting: runs the sifting block in both roles. Random Alice codes and Bob
// detections are kept in two reference tables; each side's code_store is replaced by a
// read-port model with two cycles of latency. Bob's entry stream goes to Alice's
// instance, whose replies go to Bob's instance. Checked against values computed here:
// every reply word, Alice's and Bob's sifted key bits (equal except where Bob's bit is
// wrong), the signal and decoy error counters, and at most 20 clocks per detection.
module tb_sifting;
  import qkd_pkg::*;
  localparam int NF = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  code_t acode [NF][1018];
  code_t bcode [NF][1018];

  // Alice instance
  logic a_iv, a_ir, a_ov, a_kv, a_kb, a_rq, a_ack;
  logic [15:0] a_id, a_od;
  logic [POS_W-1:0] a_rp; logic [FRAME_W-1:0] a_rf; code_t a_rc;
  logic [31:0] a_ne, a_nk, a_sc, a_se, a_dc, a_de, a_vc; logic [7:0] a_lc;
  // Bob instance
  logic b_iv, b_ir, b_ov, b_kv, b_kb, b_rq, b_ack;
  logic [15:0] b_id, b_od;
  logic [POS_W-1:0] b_rp; logic [FRAME_W-1:0] b_rf; code_t b_rc;
  logic [31:0] b_ne, b_nk, b_sc, b_se, b_dc, b_de, b_vc; logic [7:0] b_lc;

  sifting u_a (.clk, .rst_n, .is_bob(1'b0), .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id),
    .out_valid(a_ov), .out_ready(1'b1), .out_data(a_od), .key_valid(a_kv), .key_ready(1'b1), .key_bit(a_kb),
    .rd_req(a_rq), .rd_ready(1'b1), .rd_pos(a_rp), .rd_frame(a_rf), .rd_ack(a_ack), .rd_code(a_rc),
    .n_entries(a_ne), .n_key(a_nk), .sig_checked(a_sc), .sig_errors(a_se), .dec_checked(a_dc),
    .dec_errors(a_de), .vac_count(a_vc), .last_cycles(a_lc));
  sifting u_b (.clk, .rst_n, .is_bob(1'b1), .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id),
    .out_valid(b_ov), .out_ready(1'b1), .out_data(b_od), .key_valid(b_kv), .key_ready(1'b1), .key_bit(b_kb),
    .rd_req(b_rq), .rd_ready(1'b1), .rd_pos(b_rp), .rd_frame(b_rf), .rd_ack(b_ack), .rd_code(b_rc),
    .n_entries(b_ne), .n_key(b_nk), .sig_checked(b_sc), .sig_errors(b_se), .dec_checked(b_dc),
    .dec_errors(b_de), .vac_count(b_vc), .last_cycles(b_lc));

  // read-port models
  logic [1:0] a_pipe, b_pipe; code_t a_c1, a_c2, b_c1, b_c2;
  always @(posedge clk) begin
    a_pipe <= {a_pipe[0], a_rq}; b_pipe <= {b_pipe[0], b_rq};
    a_c1 <= acode[a_rf % NF][a_rp]; a_c2 <= a_c1;
    b_c1 <= bcode[b_rf % NF][b_rp]; b_c2 <= b_c1;
  end
  assign a_ack = a_pipe[1]; assign a_rc = a_c2;
  assign b_ack = b_pipe[1]; assign b_rc = b_c2;

  logic [15:0] bob_stream[$], exp_reply[$], got_reply[$];
  bit exp_akey[$], exp_bkey[$], got_akey[$], got_bkey[$];
  int exp_sc = 0, exp_se = 0, exp_dc = 0, exp_de = 0, nmatch_sig = 0, maxc = 0;

  always @(posedge clk) if (rst_n) begin
    if (a_ov) got_reply.push_back(a_od);
    if (a_kv) got_akey.push_back(a_kb);
    if (b_kv) got_bkey.push_back(b_kb);
    if (a_lc > maxc) maxc = a_lc;
    if (b_lc > maxc) maxc = b_lc;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic feed(ref logic v, ref logic [15:0] d, input logic [15:0] w, ref logic r);
    @(negedge clk); v = 1; d = w;
    @(posedge clk); while (!r) @(posedge clk);
    @(negedge clk); v = 0;
  endtask

  initial begin
    a_iv = 0; b_iv = 0; a_id = 0; b_id = 0;
    // random tables and the expected results, worked out independently
    for (int f = 0; f < NF; f++) begin
      bob_stream.push_back(head_hi(FRAME_W'(f)));
      bob_stream.push_back(head_lo(FRAME_W'(f)));
      exp_reply.push_back(head_hi(FRAME_W'(f)));
      exp_reply.push_back(head_lo(FRAME_W'(f)));
      for (int p = 0; p < 1018; p++) begin
        int r;
        r = $urandom % 8;
        acode[f][p] = '{cls: (r < 6) ? CLS_SIGNAL : (r == 6) ? CLS_DECOY : CLS_VACUUM, pol: pol_e'($urandom)};
        bcode[f][p] = '{cls: CLS_NONE, pol: POL_H};
        if ($urandom % 20 == 0) begin
          logic bb, bbit, rev;
          bb = 1'($urandom);
          // same basis: Bob's bit is Alice's except with 5% errors; else random
          bbit = (bb == acode[f][p].pol[1]) ? (acode[f][p].pol[0] ^ (($urandom % 20) == 0)) : 1'($urandom);
          bcode[f][p] = '{cls: CLS_SIGNAL, pol: pol_e'({bb, bbit})};
          bob_stream.push_back({2'b01, POS_W'(p), bb, 3'b000});
          if (bb == acode[f][p].pol[1]) begin
            rev = 0;
            if (acode[f][p].cls == CLS_SIGNAL) begin
              rev = (nmatch_sig % 10) == 9; nmatch_sig++;
              if (!rev) begin exp_akey.push_back(acode[f][p].pol[0]); exp_bkey.push_back(bbit); end
              else begin exp_sc++; exp_se += (bbit != acode[f][p].pol[0]); end
            end else if (acode[f][p].cls == CLS_DECOY) begin
              rev = 1; exp_dc++; exp_de += (bbit != acode[f][p].pol[0]);
            end
            exp_reply.push_back({2'b01, POS_W'(p), acode[f][p].cls, rev, rev ? acode[f][p].pol[0] : 1'b0});
          end
        end
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (bob_stream[i]) feed(a_iv, a_id, bob_stream[i], a_ir);
    repeat (30) @(posedge clk);
    checks++;
    if (got_reply.size() != exp_reply.size()) begin
      failures++; $display("FAIL replies %0d exp %0d", got_reply.size(), exp_reply.size());
    end
    foreach (exp_reply[i]) if (i < got_reply.size()) begin
      checks++;
      if (got_reply[i] != exp_reply[i]) begin failures++; $display("FAIL reply %0d %h exp %h", i, got_reply[i], exp_reply[i]); end
    end
    foreach (got_reply[i]) feed(b_iv, b_id, got_reply[i], b_ir);
    repeat (30) @(posedge clk);
    checks++;
    if (got_akey != exp_akey || got_bkey != exp_bkey) begin
      failures++; $display("FAIL key bits a %0d/%0d b %0d/%0d", got_akey.size(), exp_akey.size(), got_bkey.size(), exp_bkey.size());
    end
    checks++;
    if (b_sc != 32'(exp_sc) || b_se != 32'(exp_se) || b_dc != 32'(exp_dc) || b_de != 32'(exp_de)) begin
      failures++; $display("FAIL stats sc %0d/%0d se %0d/%0d dc %0d/%0d de %0d/%0d", b_sc, exp_sc, b_se, exp_se, b_dc, exp_dc, b_de, exp_de);
    end
    checks++;
    if (maxc > 20 || maxc == 0) begin failures++; $display("FAIL cycles per detection %0d", maxc); end
    $display("key bits %0d, signal checks %0d errors %0d, decoy %0d/%0d, max cycles/detection %0d",
             got_akey.size(), b_sc, b_se, b_dc, b_de, maxc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
