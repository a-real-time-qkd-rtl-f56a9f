// tb_crc32: feeds the bytes of "123456789" least significant bit first and checks the
// standard CRC-32 check value 0xCBF43926; then checks restart and a second message
// against a bitwise reference.
// 0xCBF43926 is the published check value of the standard CRC-32; the paper names no
// polynomial, the choice is this design's.
module tb_crc32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clr, en, din;
  logic [31:0] crc, r;
  byte msg [9] = '{8'h31, 8'h32, 8'h33, 8'h34, 8'h35, 8'h36, 8'h37, 8'h38, 8'h39};
  crc32 dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    clr = 0; en = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (msg[i]) for (int b = 0; b < 8; b++) begin
      @(negedge clk); en = 1; din = msg[i][b];
    end
    @(negedge clk); en = 0; #1;
    checks++;
    if (crc != 32'hCBF43926) begin failures++; $display("FAIL check value %h", crc); end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    r = 32'hffffffff;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk); en = 1; din = 1'($urandom);
      r = (r >> 1) ^ ((r[0] ^ din) ? 32'hEDB88320 : 0);
    end
    @(negedge clk); en = 0; #1;
    checks++;
    if (crc != ~r) begin failures++; $display("FAIL random message"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
