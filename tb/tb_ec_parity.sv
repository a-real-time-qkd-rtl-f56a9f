// tb_ec_parity: random segments; the accumulated parity and the mismatch flag are
// compared with the XOR of the bits fed.
// Reference: XOR of the segment computed in the testbench. The parity comparison is the
// paper's (Fig 9).
module tb_ec_parity;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clr, en, din, other, parity, mismatch;
  bit ref_p;
  ec_parity dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    clr = 0; en = 0; din = 0; other = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 200; s++) begin
      @(negedge clk); clr = 1; en = 0; ref_p = 0;
      @(negedge clk); clr = 0;
      for (int i = 0; i < 1 + $urandom % 64; i++) begin
        en = ($urandom % 4) != 0; din = 1'($urandom);
        if (en) ref_p ^= din;
        @(negedge clk);
      end
      en = 0; other = 1'($urandom);
      #1;
      checks++;
      if (parity != ref_p || mismatch != (ref_p ^ other)) begin failures++; $display("FAIL segment %0d", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
