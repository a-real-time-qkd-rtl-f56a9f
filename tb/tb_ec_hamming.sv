// tb_ec_hamming: feeds a random segment of 2**r bits and the same segment with one bit
// flipped to two instances; the XOR of the syndromes must be the flipped index.
// Reference: a software syndrome (XOR of 1-based positions of ones) computed in the
// testbench; the error index must equal the flipped position. Code choice is this design's.
module tb_ec_hamming;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clr, en, da, db;
  logic [11:0] idx, sa, sb, ea, eb;
  logic [4095:0] seg;
  int r, e;
  ec_hamming #(.W(12)) u_a (.clk, .rst_n, .clr, .en, .din(da), .idx, .other(sb), .synd(sa), .err_idx(ea));
  ec_hamming #(.W(12)) u_b (.clk, .rst_n, .clr, .en, .din(db), .idx, .other(sa), .synd(sb), .err_idx(eb));
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    clr = 0; en = 0; da = 0; db = 0; idx = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 120; s++) begin
      r = 3 + s % 10; e = $urandom % (1 << r);
      for (int i = 0; i < 4096; i += 32) seg[i +: 32] = $urandom;
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0; en = 1;
      for (int i = 0; i < (1 << r); i++) begin
        idx = 12'(i); da = seg[i]; db = seg[i] ^ (i == e);
        @(negedge clk);
      end
      en = 0; #1;
      checks++;
      if (ea != 12'(e) || eb != 12'(e)) begin failures++; $display("FAIL r=%0d e=%0d got %0d", r, e, ea); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
