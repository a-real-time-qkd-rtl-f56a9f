// tb_usb_if: connects usb_if to the slave-FIFO chip model. The host pushes random words
// into both download FIFOs and the FPGA side pushes random words into both upload
// streams, with random back-pressure; every word must arrive once, in order, on the
// right port.
module tb_usb_if;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [1:0] fifoadr; logic slrd_n, slwr_n, sloe_n, flag_empty_n, flag_full_n, fd_oe;
  logic [15:0] fd_i, fd_o, dl_data;
  logic dl_sift_valid, dl_sift_ready, dl_cmd_valid, dl_cmd_ready;
  logic ul_sift_valid, ul_sift_ready, ul_ec_valid, ul_ec_ready;
  logic [15:0] ul_sift_data, ul_ec_data;
  logic [1:0] h_dl_valid, h_ul_valid, h_ul_pop;
  logic [15:0] h_dl_data [2], h_ul_data [2];
  logic [15:0] sent_dl [2][$], sent_ul [2][$], got_dl [2][$], got_ul [2][$];

  usb_if #(.BURST(16)) dut (.*);
  fx2_model #(.CAP(64)) u_chip (.clk, .fifoadr, .slrd_n, .slwr_n, .sloe_n, .flag_empty_n,
    .flag_full_n, .fd_o(fd_i), .fd_i(fd_o), .h_dl_valid, .h_dl_data, .h_ul_valid, .h_ul_data, .h_ul_pop);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // FPGA-side sinks and sources
  always @(posedge clk) if (rst_n) begin
    if (dl_sift_valid && dl_sift_ready) got_dl[0].push_back(dl_data);
    if (dl_cmd_valid && dl_cmd_ready)   got_dl[1].push_back(dl_data);
    taken[0] <= ul_sift_valid && ul_sift_ready;
    taken[1] <= ul_ec_valid && ul_ec_ready;
    if (ul_sift_valid && ul_sift_ready) sent_ul[0].push_back(ul_sift_data);
    if (ul_ec_valid && ul_ec_ready)     sent_ul[1].push_back(ul_ec_data);
    for (int i = 0; i < 2; i++) if (h_ul_pop[i] && h_ul_valid[i]) got_ul[i].push_back(h_ul_data[i]);
  end

  int n_up [2];
  logic [1:0] taken = 2'b00;
  initial begin
    h_dl_valid = 0; h_ul_pop = 0; h_dl_data[0] = 0; h_dl_data[1] = 0;
    dl_sift_ready = 0; dl_cmd_ready = 0; ul_sift_valid = 0; ul_ec_valid = 0;
    ul_sift_data = 0; ul_ec_data = 0; n_up[0] = 0; n_up[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      for (int i = 0; i < 2; i++) begin
        h_dl_valid[i] = (t < 15000) && ($urandom % 4 == 0) && (u_chip.wp[i] - u_chip.rp[i] < 60);
        h_dl_data[i]  = 16'($urandom);
        if (h_dl_valid[i]) sent_dl[i].push_back(h_dl_data[i]);
        h_ul_pop[i] = ($urandom % 3) != 0;
      end
      dl_sift_ready = ($urandom % 4) != 0;
      dl_cmd_ready  = ($urandom % 4) != 0;
      // upload sources hold their word until taken
      if (!ul_sift_valid && t < 15000 && $urandom % 4 == 0) begin ul_sift_valid = 1; ul_sift_data = 16'($urandom); end
      if (!ul_ec_valid && t < 15000 && $urandom % 4 == 0) begin ul_ec_valid = 1; ul_ec_data = 16'($urandom); end
      @(posedge clk); #1;
      if (ul_sift_valid && taken[0]) ul_sift_valid = 0;
      if (ul_ec_valid && taken[1]) ul_ec_valid = 0;
    end
    for (int i = 0; i < 2; i++) begin
      checks++;
      if (got_dl[i] != sent_dl[i] || sent_dl[i].size() < 100) begin
        failures++; $display("FAIL download %0d: %0d of %0d", i, got_dl[i].size(), sent_dl[i].size());
      end
      checks++;
      if (got_ul[i] != sent_ul[i] || sent_ul[i].size() < 100) begin
        failures++; $display("FAIL upload %0d: %0d of %0d", i, got_ul[i].size(), sent_ul[i].size());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
