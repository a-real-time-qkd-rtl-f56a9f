// tb_det_coder: checks Bob's detector coding: per-slot code (single click -> detected
// with its polarization, none or multiple -> no detection), the entry words with
// position and basis, heads passed through, and the counters.
// Entry word layout is this design's; the 16-bit entry per detection and the 32-bit head
// are the paper's. Interface: slot stream in, code and entry streams out, one cycle later.
module tb_det_coder;
  import qkd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic slot_valid, head_valid, code_valid, out_valid, out_ready;
  logic [POS_W-1:0] pos_in, pos;
  logic [FRAME_W-1:0] frame_in, frame;
  logic [3:0] clicks;
  logic [15:0] head_word, out_data, overflow;
  code_t code;
  logic [31:0] det_count, multi_count;
  int n_single = 0, n_multi = 0;
  logic [15:0] exp_w; logic exp_v; code_t exp_c; logic exp_cv; logic [POS_W-1:0] exp_p;

  det_coder dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    slot_valid = 0; head_valid = 0; pos_in = 0; frame_in = 0; clicks = 0; head_word = 0; out_ready = 1;
    exp_v = 0; exp_cv = 0; exp_w = 0; exp_c = '0; exp_p = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      checks++;
      if (out_valid != exp_v || (exp_v && out_data != exp_w) || code_valid != exp_cv ||
          (exp_cv && (code != exp_c || pos != exp_p))) begin
        failures++; $display("FAIL i=%0d out=%h/%h v=%b code=%b/%b", i, out_data, exp_w, out_valid, code, exp_c);
      end
      head_valid = ($urandom % 50) == 0;
      slot_valid = !head_valid && ($urandom % 4) != 0;
      head_word  = 16'($urandom);
      pos_in     = POS_W'($urandom % 1018);
      frame_in   = FRAME_W'(i / 100);
      clicks     = 4'($urandom);
      // independent expectation
      exp_cv = slot_valid; exp_p = pos_in; exp_v = 0;
      if ($countones(clicks) == 1) begin
        int k;
        k = (clicks == 4'b0001) ? 0 : (clicks == 4'b0010) ? 1 : (clicks == 4'b0100) ? 2 : 3;
        exp_c = '{cls: CLS_SIGNAL, pol: pol_e'(k)};
        if (slot_valid) begin
          exp_v = 1; exp_w = {2'b01, pos_in, 1'(k >> 1), 3'b000}; n_single++;
        end
      end else begin
        exp_c = '{cls: CLS_NONE, pol: POL_H};
        if (slot_valid && clicks != 0) n_multi++;
      end
      if (head_valid) begin exp_v = 1; exp_w = head_word; end
    end
    @(negedge clk);
    checks++;
    if (det_count != 32'(n_single) || multi_count != 32'(n_multi) || overflow != 0) begin
      failures++; $display("FAIL counters %0d/%0d %0d/%0d", det_count, n_single, multi_count, n_multi);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
