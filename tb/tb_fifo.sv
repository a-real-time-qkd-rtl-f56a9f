// tb_fifo: self-checking test of the synchronous FIFO.
// Random pushes and pops against a queue model; checks order, data, full and empty.
// The level output is checked every cycle. Depth and handshake are this design's.
module tb_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [4:0] level;
  logic [15:0] q[$];

  fifo #(.WIDTH(16), .DEPTH(16)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      out_ready = ($urandom % 2) != 0;
      in_data   = 16'($urandom);
      checks++;
      if (out_valid != (q.size() != 0) || in_ready != (q.size() != 16) || level != 5'(q.size())) begin
        failures++; $display("FAIL flags at %0d size %0d", i, q.size());
      end
      if (out_valid) begin
        checks++;
        if (out_data != q[0]) begin failures++; $display("FAIL data %h exp %h", out_data, q[0]); end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
