// tb_code_store: streams one code per clock (the full pulse rate) into code_store with a
// small SRAM model and, at the same time, issues random reads of slots already written;
// checks each read code against a reference array and that every read finishes within
// the sifting budget of 20 clocks.
// The pulse rate of one code per clock and the 4-bit code are the paper's; the packing
// and the read-latency bound of 3 cycles checked here are this design's.
module tb_code_store;
  import qkd_pkg::*;
  localparam int AW = 12;               // 16 frames in the ring for the test
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_valid, rd_req, rd_ready, rd_ack;
  code_t wr_code, rd_code;
  logic [POS_W-1:0] wr_pos, rd_pos;
  logic [FRAME_W-1:0] wr_frame, rd_frame;
  logic [AW-1:0] sram_addr;
  logic [15:0] sram_dq_o, sram_dq_i, wr_overrun;
  logic sram_we_n, sram_oe_n, sram_ce_n;
  code_t ref_code [8][1018];
  int written_upto;   // slots (frame*1018+pos) fully stored
  int exp_f, exp_p, t_req, maxlat = 0, nreads = 0;
  bit busy;

  code_store #(.AW(AW)) dut (.*);
  sram_model #(.AW(AW)) u_sram (.clk, .addr(sram_addr), .dq_i(sram_dq_o), .dq_o(sram_dq_i),
                                .we_n(sram_we_n), .oe_n(sram_oe_n), .ce_n(sram_ce_n));

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer: frames 0..7, one slot per clock with 6 idle clocks between frames
  initial begin
    wr_valid = 0; wr_code = '0; wr_pos = 0; wr_frame = 0; written_upto = 0;
    wait (rst_n);
    for (int f = 0; f < 8; f++) begin
      for (int g = 0; g < 6; g++) begin @(negedge clk); wr_valid = 0; end
      for (int p = 0; p < 1018; p++) begin
        @(negedge clk);
        wr_valid = 1; wr_pos = POS_W'(p); wr_frame = FRAME_W'(f);
        wr_code = code_t'($urandom);
        ref_code[f][p] = wr_code;
        written_upto = f * 1018 + p - 8;   // a word is in SRAM a few clocks later
      end
    end
    @(negedge clk); wr_valid = 0;
  end

  // reader
  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    rd_req = 0; rd_pos = 0; rd_frame = 0; busy = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (1100) @(negedge clk);
    while (written_upto < 8 * 1018 - 20) begin
      int s;
      @(negedge clk);
      s = $urandom % (written_upto + 1);
      exp_f = s / 1018; exp_p = s % 1018;
      rd_frame = FRAME_W'(exp_f); rd_pos = POS_W'(exp_p); rd_req = 1; t_req = cyc;
      do @(negedge clk); while (!(rd_ready == 0 && rd_req)); // accepted at previous edge
      rd_req = 0;
      while (!rd_ack) @(negedge clk);
      checks++; nreads++;
      if (rd_code != ref_code[exp_f][exp_p]) begin
        failures++; $display("FAIL read f=%0d p=%0d got %b exp %b", exp_f, exp_p, rd_code, ref_code[exp_f][exp_p]);
      end
      if (cyc - t_req > maxlat) maxlat = cyc - t_req;
    end
    checks++;
    if (maxlat > 20 || nreads < 100 || wr_overrun != 0) begin
      failures++; $display("FAIL maxlat=%0d reads=%0d overrun=%0d", maxlat, nreads, wr_overrun);
    end
    $display("reads=%0d max read latency=%0d clocks", nreads, maxlat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
