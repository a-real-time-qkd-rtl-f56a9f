// tb_ec_permute: for several iterations, checks that the address map is a bijection of
// 0..L-1 and equals the composition of the step map i -> A*i + B computed here.
// The affine permutation is this design's choice; the paper only says one permutation per iteration.
module tb_ec_permute;
  localparam int LW = 8;
  localparam logic [31:0] A = 32'h9E3779B9, B = 32'h7F4A7C15;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic restart, next;
  logic [LW-1:0] idx, addr;
  int refmap [256];
  bit seen [256];
  ec_permute #(.LW(LW), .A(A), .B(B)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    restart = 0; next = 0; idx = 0;
    for (int i = 0; i < 256; i++) refmap[i] = i;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      foreach (seen[i]) seen[i] = 0;
      for (int i = 0; i < 256; i++) begin
        @(negedge clk); idx = LW'(i); #1;
        checks++;
        if (int'(addr) != refmap[i] || seen[addr]) begin failures++; $display("FAIL t=%0d i=%0d", t, i); end
        seen[addr] = 1;
      end
      // next permutation: s_(t+1)[i] = s_t[A*i+B]
      begin
        int nm [256];
        for (int i = 0; i < 256; i++) nm[i] = refmap[(int'(A[LW-1:0]) * i + int'(B[LW-1:0])) % 256];
        refmap = nm;
      end
      @(negedge clk); next = 1; @(negedge clk); next = 0;
    end
    @(negedge clk); restart = 1; @(negedge clk); restart = 0; idx = 8'd77; #1;
    checks++;
    if (addr != 8'd77) begin failures++; $display("FAIL restart"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
