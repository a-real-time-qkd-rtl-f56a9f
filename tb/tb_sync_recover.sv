// tb_sync_recover: drives Alice-style sync frames (N = 6 empty clocks, K = 1018 pulses)
// with random clicks and checks Bob's recovered stream: frame heads before each frame,
// frame numbers from 0, positions by pulse count, three-cycle latency, a lost pulse
// that shifts the numbering only until the next frame, and a non-zero bit offset.
module tb_sync_recover;
  import qkd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic run, sync_in, slot_valid, head_valid;
  logic [3:0] clicks_in, clicks;
  logic signed [7:0] offset;
  logic [POS_W-1:0] pos;
  logic [FRAME_W-1:0] frame;
  logic [15:0] head_word, lost_frames;

  // expected outputs, in order: kind (1 head, 0 slot), value, input cycle
  int  q_kind[$];
  longint q_val[$];
  longint q_t[$];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  sync_recover dut (.*);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  initial forever begin
    @(negedge clk);
    if (rst_n && (head_valid || slot_valid)) begin
      checks++;
      if (q_kind.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        int k; longint v, t;
        k = q_kind.pop_front(); v = q_val.pop_front(); t = q_t.pop_front();
        if (head_valid) begin
          if (k != 1 || v != longint'(head_word)) begin
            failures++; $display("FAIL head %h exp %h kind %0d", head_word, v, k);
          end
        end else if (k != 0 || v != longint'({frame, pos, clicks}) || cyc - t != 3) begin
          failures++;
          $display("FAIL slot pos=%0d frame=%0d exp %h lat=%0d", pos, frame, v, cyc - t);
        end
      end
    end
  end

  task automatic send_frames(input int nfr, input int off, input int lost_frame, input int lost_pos);
    for (int f = 0; f < nfr; f++) begin
      int bobpos;
      for (int g = 0; g < 6; g++) begin @(negedge clk); sync_in = 0; clicks_in = 0; end
      q_kind.push_back(1); q_val.push_back(longint'(head_hi(FRAME_W'(f)))); q_t.push_back(0);
      q_kind.push_back(1); q_val.push_back(longint'(head_lo(FRAME_W'(f)))); q_t.push_back(0);
      bobpos = 0;
      for (int p = 0; p < 1018; p++) begin
        @(negedge clk);
        if (f == lost_frame && p == lost_pos) begin
          sync_in = 0; clicks_in = 0;
        end else begin
          int ep;
          sync_in = 1;
          clicks_in = (($urandom % 10) == 0) ? 4'($urandom) : 4'b0;
          ep = bobpos + off;
          if (ep >= 0 && ep < 1018) begin
            q_kind.push_back(0); q_t.push_back(cyc);
            q_val.push_back(longint'({FRAME_W'(f), POS_W'(ep), clicks_in}));
          end
          bobpos++;
        end
      end
    end
    for (int g = 0; g < 8; g++) begin @(negedge clk); sync_in = 0; clicks_in = 0; end
  endtask

  initial begin
    run = 0; sync_in = 0; clicks_in = 0; offset = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); run = 1;
    send_frames(4, 0, 2, 500);
    // the lost pulse is noticed at the next boundary (frame 3) and counted there
    checks++;
    if (lost_frames != 16'd1) begin failures++; $display("FAIL lost_frames=%0d", lost_frames); end
    checks++;
    if (q_kind.size() != 0) begin failures++; $display("FAIL %0d outputs missing", q_kind.size()); end
    @(negedge clk); run = 0; offset = -8'sd2;
    @(negedge clk); run = 1;
    send_frames(2, -2, -1, -1);
    checks++;
    if (q_kind.size() != 0) begin failures++; $display("FAIL %0d outputs missing", q_kind.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
