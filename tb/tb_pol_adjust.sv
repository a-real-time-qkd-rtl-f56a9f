// tb_pol_adjust: polarization feedback search against a model of the fibre. The wrong
// detector of the reference pair clicks with probability
//   floor + 0.3 * sum_c ((code_c - opt_c) / 256)^2   (capped at 0.5)
// per detection, with detections in half the slots. Run 1 (H reference): from codes 0
// the search must reach right >= 150 x wrong with every code within 3 steps of the
// optimum. Run 2 (P reference, detectors 2/3) from a preloaded start. Run 3 raises the
// floor to 5%, which no setting can beat: the search must give up with fail set after
// MAX_ROUNDS controller visits. The window is shortened to 4096 slots; the 150:1
// target is the paper's, the fibre model is this testbench's.
module tb_pol_adjust;
  localparam int NCTRL = 3, DW = 12, WINDOW = 4096, RATIO = 150, STEP = 16, MAXR = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, mode = 0, load = 0, slot_valid = 0;
  logic [NCTRL-1:0][DW-1:0] hv_init = '0, hv_code;
  logic [3:0] clicks = 0;
  logic busy, done, fail;
  logic [31:0] right_cnt, wrong_cnt;
  int opt [NCTRL];
  real floor_p = 0.002;

  pol_adjust #(.NCTRL(NCTRL), .DW(DW), .WINDOW(WINDOW), .RATIO(RATIO), .STEP(STEP), .MAX_ROUNDS(MAXR))
    dut (.clk, .rst_n, .start, .mode, .load, .hv_init, .slot_valid, .clicks,
         .hv_code, .busy, .done, .fail, .right_cnt, .wrong_cnt);

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // fibre and detectors
  always @(negedge clk) begin
    real p, d;
    p = floor_p;
    for (int c = 0; c < NCTRL; c++) begin
      d = (real'(int'(hv_code[c])) - real'(opt[c])) / 256.0;
      p += 0.3 * d * d;
    end
    if (p > 0.5) p = 0.5;
    slot_valid = 1;
    clicks = 0;
    if ($urandom % 2 == 0) begin
      if (real'($urandom % 100000) < p * 100000.0) clicks = mode ? 4'b1000 : 4'b0010;
      else                                         clicks = mode ? 4'b0100 : 4'b0001;
    end
  end

  task automatic run(input logic m, input bit expect_ok);
    int trials;
    @(negedge clk); mode = m; start = 1;
    @(negedge clk); start = 0;
    wait (!busy);
    @(posedge clk);
    checks++;
    if (expect_ok) begin
      if (!done || fail) begin failures++; $display("FAIL search did not converge"); end
      checks++;
      if (right_cnt < RATIO * wrong_cnt) begin failures++; $display("FAIL ratio %0d:%0d", right_cnt, wrong_cnt); end
      for (int c = 0; c < NCTRL; c++) begin
        checks++;
        if (int'(hv_code[c]) - opt[c] > 3 * STEP || opt[c] - int'(hv_code[c]) > 3 * STEP) begin
          failures++; $display("FAIL controller %0d code %0d optimum %0d", c, hv_code[c], opt[c]);
        end
      end
    end else begin
      if (!fail || done) begin failures++; $display("FAIL search should give up"); end
    end
    $display("mode %0d: done %0d fail %0d, right %0d wrong %0d, codes %0d %0d %0d", m, done, fail,
             right_cnt, wrong_cnt, hv_code[0], hv_code[1], hv_code[2]);
  endtask

  initial begin
    opt[0] = 200; opt[1] = 90; opt[2] = 300;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1'b0, 1);
    opt[0] = 500; opt[1] = 420; opt[2] = 260;
    @(negedge clk); hv_init[0] = 12'd560; hv_init[1] = 12'd380; hv_init[2] = 12'd300; load = 1;
    @(negedge clk); load = 0;
    checks++;
    if (hv_code[0] != 12'd560) begin failures++; $display("FAIL preload"); end
    run(1'b1, 1);
    floor_p = 0.05;
    run(1'b0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
