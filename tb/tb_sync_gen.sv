// tb_sync_gen: checks the sync frame format: N low clocks then K pulse clocks,
// positions 0..K-1, frame number incrementing, period K+N. Runs at the paper's
// K = 1018, N = 6.
// K and N are the paper's; putting the gap first in the frame is this design's.
module tb_sync_gen;
  import qkd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic run, sync_out, slot_valid;
  logic [POS_W-1:0] pos;
  logic [FRAME_W-1:0] frame;
  int t, exp_pos, exp_frame, nslots;

  sync_gen dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); run = 1;
    @(posedge clk); // first count
    nslots = 0;
    for (t = 0; t < 4 * 1024; t++) begin
      @(negedge clk);
      // cycle t after start shows count t (mod 1024)
      exp_pos   = (t % 1024) - 6;
      exp_frame = t / 1024;
      checks++;
      if ((t % 1024) < 6) begin
        if (sync_out || slot_valid) begin failures++; $display("FAIL pulse in gap t=%0d", t); end
      end else begin
        if (!sync_out || !slot_valid || pos != POS_W'(exp_pos) || frame != FRAME_W'(exp_frame)) begin
          failures++; $display("FAIL t=%0d pos=%0d frame=%0d", t, pos, frame);
        end
        nslots++;
      end
    end
    checks++;
    if (nslots != 4 * 1018) begin failures++; $display("FAIL slots %0d", nslots); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
