// tb_qubit_encoder: checks the mapping of random bits to class and polarization, the
// laser drive, the 6:1:1 and 1:1:1:1 ratios over random input, and the H / P test light.
// Checks class ratios 6:1:1 and polarization ratios 1:1:1:1 (the paper's) over
// 16000 slots, the laser outputs one cycle after each slot and the H/P test light.
module tb_qubit_encoder;
  import qkd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic slot_valid, code_valid, las_decoy;
  logic [POS_W-1:0] pos_in, pos;
  logic [FRAME_W-1:0] frame_in, frame;
  logic [4:0] rnd;
  logic [1:0] test;
  code_t code;
  logic [3:0] las_pol;
  int ncls[4], npol[4];
  logic [4:0] r_q; logic v_q; logic [1:0] t_q;

  qubit_encoder dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_out();
    logic [1:0] ec, ep;
    ep = r_q[1:0];
    ec = (r_q[4:2] == 3'd6) ? 2'd1 : (r_q[4:2] == 3'd7) ? 2'd2 : 2'd0;
    if (t_q == 2'd1) begin ec = 0; ep = 0; end
    if (t_q == 2'd2) begin ec = 0; ep = 2; end
    checks++;
    if (code_valid != v_q || code.cls != cls_e'(ec) || code.pol != pol_e'(ep) ||
        las_pol != ((v_q && ec != 2) ? (4'b1 << ep) : 4'b0) || las_decoy != (v_q && ec == 1)) begin
      failures++;
      $display("FAIL rnd=%b test=%0d code=%b las=%b dec=%b", r_q, t_q, code, las_pol, las_decoy);
    end
    if (v_q) begin ncls[code.cls]++; npol[code.pol]++; end
  endtask

  initial begin
    slot_valid = 0; rnd = 0; test = 0; pos_in = 0; frame_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 16000; i++) begin
      @(negedge clk);
      if (i > 0) expect_out();
      slot_valid = ($urandom % 8) != 0;
      rnd        = 5'($urandom);
      test       = (i < 15000) ? 2'd0 : 2'($urandom % 3);
      if (i == 14999) begin
        // ratios over the random part: signal 6/8, decoy 1/8, vacuum 1/8, polarizations 1/4
        checks++;
        if (ncls[0] * 8 < (ncls[0] + ncls[1] + ncls[2]) * 6 * 95 / 100 ||
            ncls[1] * 8 > (ncls[0] + ncls[1] + ncls[2]) * 110 / 100 ||
            npol[0] * 4 < (npol[0] + npol[1] + npol[2] + npol[3]) * 90 / 100) begin
          failures++; $display("FAIL ratios %0d %0d %0d", ncls[0], ncls[1], ncls[2]);
        end
      end
      r_q = rnd; v_q = slot_valid; t_q = test;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
