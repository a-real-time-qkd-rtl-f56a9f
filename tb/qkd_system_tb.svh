// Body shared by the end-to-end testbenches of qkd_control_board.
//
// Two boards, Alice (is_bob = 0) and Bob (is_bob = 1), each with an SRAM model and a
// slave-FIFO USB chip model. The testbench plays the parts outside the FPGAs:
//  * the optical channel: Bob's sync input is Alice's sync output (one pulse is dropped
//    once); each laser pulse reaches Bob's detectors with probability P_SIG (signal) or
//    P_DEC (decoy), in a random basis, with QBER_PM per mille bit errors when the bases
//    agree; dark clicks with probability P_DARK; the detector signals arrive CLICK_DLY
//    clocks after the matching sync pulse, so Bob's numbering is off by that much until
//    the bit offset is corrected;
//  * the single-board computers and network: configuration packets, forwarding of the
//    sifting words between the two sift ports and of the reconciliation words between
//    the EC ports (wrapped in one-word EC packets), and the offset search of the
//    paper's Fig. 6: Bob starts with offset 0, the software measures the sampled error
//    rate, and moves the offset until the error rate drops.
// Checks: the error rate is near 50% before and low after the offset correction;
// reconciliation rejects blocks from the misaligned start and accepts later ones;
// Alice's and Bob's final keys are identical, bit for bit, and of the length SFactor
// gives; after a simulated polarization drift, Bob's polarization search (with
// Alice's H test light) finds controller codes that remove the extra error, after
// which Bob's H detector clicks and his V detector stays almost silent; every named mechanism happened at least once.
// Needs before inclusion: `QKD_PARAMS (parameter override of the top or empty),
// localparams EC_LW, PA_N, PA_BLK, N_UNITS, WATCHDOG.

  localparam int P_SIG = 60, P_DEC = 20, P_DARK = 1, QBER_PM = 20;   // per mille
  localparam int CLICK_DLY = 2;
  localparam logic [15:0] SFACTOR = 16'd19661;                        // 0.3
  localparam int M_BITS = int'((longint'(PA_N) * 19661) >> 16);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------- the two boards ----------------
  logic [4:0][7:0] raw_a, raw_b;
  logic a_sync, b_sync_unused, a_dec, b_dec;
  logic [3:0] a_las, b_las;
  logic b_sync_in;
  logic [3:0] b_click;
  logic [7:0] a_dly, b_dly;
  logic [20:0] a_sa, b_sa;
  logic [15:0] a_sdo, a_sdi, b_sdo, b_sdi;
  logic a_swe, a_soe, a_sce, b_swe, b_soe, b_sce;
  logic [1:0] a_fa, b_fa;
  logic a_rd, a_wr, a_oe, a_fe, a_ff, a_fdoe, b_rd, b_wr, b_oe, b_fe, b_ff, b_fdoe;
  logic [15:0] a_fdi, a_fdo, b_fdi, b_fdo;
  logic a_fkv, b_fkv;
  logic [PA_BLK-1:0] a_fk, b_fk;
  logic [$clog2(PA_BLK+1)-1:0] a_fkb, b_fkb;
  logic [31:0] a_det, a_sk, a_sc, a_se, a_dc, a_de, a_fix;
  logic [31:0] b_det, b_sk, b_sc, b_se, b_dc, b_de, b_fix;
  logic [15:0] a_eok, a_efl, a_pau, a_lost, b_eok, b_efl, b_pau, b_lost;
  logic [7:0] a_scy, b_scy;
  logic a_tf, b_tf;
  logic [2:0][11:0] a_hv, b_hv;
  logic a_pb, a_pd, a_pf, b_pb, b_pd, b_pf;
  int hv_opt [3] = '{0, 0, 0};          // polarization controller codes that undo the fibre

  qkd_control_board `QKD_PARAMS u_alice (.clk, .rst_n, .is_bob(1'b0), .trng_raw(raw_a),
    .sync_out(a_sync), .las_pol(a_las), .las_decoy(a_dec), .sync_in(1'b0), .spd_click(4'b0),
    .spd_delay(a_dly), .sram_addr(a_sa), .sram_dq_o(a_sdo), .sram_dq_i(a_sdi),
    .sram_we_n(a_swe), .sram_oe_n(a_soe), .sram_ce_n(a_sce),
    .usb_fifoadr(a_fa), .usb_slrd_n(a_rd), .usb_slwr_n(a_wr), .usb_sloe_n(a_oe),
    .usb_flag_empty_n(a_fe), .usb_flag_full_n(a_ff), .usb_fd_i(a_fdi), .usb_fd_o(a_fdo), .usb_fd_oe(a_fdoe),
    .fk_valid(a_fkv), .fk_data(a_fk), .fk_bits(a_fkb),
    .st_det_count(a_det), .st_sift_key(a_sk), .st_sig_checked(a_sc), .st_sig_errors(a_se),
    .st_dec_checked(a_dc), .st_dec_errors(a_de), .st_ec_ok(a_eok), .st_ec_fail(a_efl),
    .st_ec_fixed(a_fix), .st_pa_units(a_pau), .st_lost_frames(a_lost), .st_sift_cycles(a_scy),
    .st_trng_fail(a_tf), .hv_code(a_hv), .st_pol_busy(a_pb), .st_pol_done(a_pd), .st_pol_fail(a_pf));
  qkd_control_board `QKD_PARAMS u_bob (.clk, .rst_n, .is_bob(1'b1), .trng_raw(raw_b),
    .sync_out(b_sync_unused), .las_pol(b_las), .las_decoy(b_dec), .sync_in(b_sync_in), .spd_click(b_click),
    .spd_delay(b_dly), .sram_addr(b_sa), .sram_dq_o(b_sdo), .sram_dq_i(b_sdi),
    .sram_we_n(b_swe), .sram_oe_n(b_soe), .sram_ce_n(b_sce),
    .usb_fifoadr(b_fa), .usb_slrd_n(b_rd), .usb_slwr_n(b_wr), .usb_sloe_n(b_oe),
    .usb_flag_empty_n(b_fe), .usb_flag_full_n(b_ff), .usb_fd_i(b_fdi), .usb_fd_o(b_fdo), .usb_fd_oe(b_fdoe),
    .fk_valid(b_fkv), .fk_data(b_fk), .fk_bits(b_fkb),
    .st_det_count(b_det), .st_sift_key(b_sk), .st_sig_checked(b_sc), .st_sig_errors(b_se),
    .st_dec_checked(b_dc), .st_dec_errors(b_de), .st_ec_ok(b_eok), .st_ec_fail(b_efl),
    .st_ec_fixed(b_fix), .st_pa_units(b_pau), .st_lost_frames(b_lost), .st_sift_cycles(b_scy),
    .st_trng_fail(b_tf), .hv_code(b_hv), .st_pol_busy(b_pb), .st_pol_done(b_pd), .st_pol_fail(b_pf));

  sram_model u_sram_a (.clk, .addr(a_sa), .dq_i(a_sdo), .dq_o(a_sdi), .we_n(a_swe), .oe_n(a_soe), .ce_n(a_sce));
  sram_model u_sram_b (.clk, .addr(b_sa), .dq_i(b_sdo), .dq_o(b_sdi), .we_n(b_swe), .oe_n(b_soe), .ce_n(b_sce));

  logic [1:0]  a_hdv, b_hdv, a_huv, b_huv, a_hup, b_hup;
  logic [15:0] a_hdd [2], b_hdd [2], a_hud [2], b_hud [2];
  fx2_model #(.CAP(4096)) u_usb_a (.clk, .fifoadr(a_fa), .slrd_n(a_rd), .slwr_n(a_wr), .sloe_n(a_oe),
    .flag_empty_n(a_fe), .flag_full_n(a_ff), .fd_o(a_fdi), .fd_i(a_fdo),
    .h_dl_valid(a_hdv), .h_dl_data(a_hdd), .h_ul_valid(a_huv), .h_ul_data(a_hud), .h_ul_pop(a_hup));
  fx2_model #(.CAP(4096)) u_usb_b (.clk, .fifoadr(b_fa), .slrd_n(b_rd), .slwr_n(b_wr), .sloe_n(b_oe),
    .flag_empty_n(b_fe), .flag_full_n(b_ff), .fd_o(b_fdi), .fd_i(b_fdo),
    .h_dl_valid(b_hdv), .h_dl_data(b_hdd), .h_ul_valid(b_huv), .h_ul_data(b_hud), .h_ul_pop(b_hup));

  // ---------------- entropy ----------------
  always @(negedge clk) begin
    for (int g = 0; g < 5; g++) begin raw_a[g] = 8'($urandom); raw_b[g] = 8'($urandom); end
  end

  // ---------------- optical channel ----------------
  logic [3:0] click_pipe [CLICK_DLY+1];
  // extra error rate from a polarization drift, in per mille
  function automatic int drift_pm();
    real e, d;
    e = 0.0;
    for (int c = 0; c < 3; c++) begin
      d = (real'(int'(b_hv[c])) - real'(hv_opt[c])) / 256.0;
      e += 300.0 * d * d;
    end
    return (e > 500.0) ? 500 : int'(e);
  endfunction
  bit drop_done = 0;
  int n_dropped = 0;
  always @(negedge clk) begin
    logic [3:0] c;
    c = 4'b0;
    if (a_las != 4'b0 && ($urandom % 1000) < (a_dec ? P_DEC : P_SIG)) begin
      logic ab, abit, bb, bbit;
      ab = (a_las == 4'b0100 || a_las == 4'b1000);
      abit = (a_las == 4'b0010 || a_las == 4'b1000);
      bb = 1'($urandom);
      bbit = (bb == ab) ? (abit ^ (($urandom % 1000) < QBER_PM + drift_pm())) : 1'($urandom);
      c = 4'b0001 << {bb, bbit};
    end
    if (($urandom % 1000) < P_DARK) c = c | (4'b0001 << ($urandom % 4));
    for (int i = CLICK_DLY; i > 0; i--) click_pipe[i] = click_pipe[i-1];
    click_pipe[0] = c;
    b_click = click_pipe[CLICK_DLY];
    b_sync_in = a_sync;
    // lose one sync pulse in the middle of frame 5
    if (!drop_done && a_sync && u_alice.u_sync_gen.frame == 5 && u_alice.u_sync_gen.pos == 500) begin
      b_sync_in = 1'b0; drop_done = 1; n_dropped++;
    end
  end

  // ---------------- host software and network ----------------
  logic [15:0] cmd_q [2][$];      // configuration packets per board
  int ec_st [2];                  // EC wrapping state per direction (0: to Bob, 1: to Alice)
  function automatic int space(input int board, input int f);
    return (board == 0) ? 4096 - (u_usb_a.wp[f] - u_usb_a.rp[f]) : 4096 - (u_usb_b.wp[f] - u_usb_b.rp[f]);
  endfunction
  task automatic reg_write(input int board, input logic [7:0] a, input logic [15:0] d);
    cmd_q[board].push_back({4'h1, 12'd2});
    cmd_q[board].push_back({8'h00, a});
    cmd_q[board].push_back(d);
  endtask

  initial begin
    a_hdv = 0; b_hdv = 0; a_hup = 0; b_hup = 0;
    a_hdd[0] = 0; a_hdd[1] = 0; b_hdd[0] = 0; b_hdd[1] = 0;
    ec_st[0] = 0; ec_st[1] = 0;
    b_sync_in = 0; b_click = 0;
    for (int i = 0; i <= CLICK_DLY; i++) click_pipe[i] = 0;
    forever begin
      @(negedge clk);
      a_hdv = 0; b_hdv = 0; a_hup = 0; b_hup = 0;
      // sifting words: Bob -> Alice and Alice -> Bob
      if (b_huv[0] && space(0, 0) > 0) begin a_hdv[0] = 1; a_hdd[0] = b_hud[0]; b_hup[0] = 1; end
      if (a_huv[0] && space(1, 0) > 0) begin b_hdv[0] = 1; b_hdd[0] = a_hud[0]; a_hup[0] = 1; end
      // command / EC port of Bob: configuration first, else wrapped EC words from Alice
      if (ec_st[0] == 0 && cmd_q[1].size() != 0 && space(1, 1) > 0) begin
        b_hdv[1] = 1; b_hdd[1] = cmd_q[1].pop_front();
      end else if (ec_st[0] == 0 && a_huv[1] && space(1, 1) > 1) begin
        b_hdv[1] = 1; b_hdd[1] = {4'h0, 12'd1}; ec_st[0] = 1;
      end else if (ec_st[0] == 1) begin
        b_hdv[1] = 1; b_hdd[1] = a_hud[1]; a_hup[1] = 1; ec_st[0] = 0;
      end
      // command / EC port of Alice
      if (ec_st[1] == 0 && cmd_q[0].size() != 0 && space(0, 1) > 0) begin
        a_hdv[1] = 1; a_hdd[1] = cmd_q[0].pop_front();
      end else if (ec_st[1] == 0 && b_huv[1] && space(0, 1) > 1) begin
        a_hdv[1] = 1; a_hdd[1] = {4'h0, 12'd1}; ec_st[1] = 1;
      end else if (ec_st[1] == 1) begin
        a_hdv[1] = 1; a_hdd[1] = b_hud[1]; b_hup[1] = 1; ec_st[1] = 0;
      end
    end
  end

  // ---------------- final keys ----------------
  bit fk_a [$], fk_b [$];
  always @(posedge clk) if (rst_n) begin
    if (a_fkv) for (int i = 0; i < a_fkb; i++) fk_a.push_back(a_fk[i]);
    if (b_fkv) for (int i = 0; i < b_fkb; i++) fk_b.push_back(b_fk[i]);
  end

  // ---------------- mechanism counters ----------------
  int n_offset_fix = 0, n_resync = 0, n_ec_fix = 0, n_ec_reject = 0, n_ec_accept = 0;
  int n_test_h = 0, n_test_v = 0, n_pol_search = 0, drift0 = 0;
  int n_pa = 0, n_decoy_check = 0, n_sample_check = 0, n_sift_budget_ok = 0;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog: cycle %0d, Alice PA units %0d, EC ok %0d fail %0d, sifted %0d", cyc, a_pau, a_eok, a_efl, a_sk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sc0, se0, sc1, se1;
    real q_before, q_after;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 2; b++) begin
      reg_write(b, 8'h02, 16'd3);          // first segment length 8 bits
      reg_write(b, 8'h03, SFACTOR);
      reg_write(b, 8'h04, 16'h1111); reg_write(b, 8'h05, 16'h2222);
      reg_write(b, 8'h06, 16'h3333); reg_write(b, 8'h07, 16'h4444);
    end
    reg_write(1, 8'h01, 16'h0000);         // Bob starts with bit offset 0 (wrong)
    reg_write(1, 8'h00, 16'h0001);         // Bob runs first
    wait (u_bob.run);
    reg_write(0, 8'h00, 16'h0001);         // then Alice
    // software measures the sampled error rate with offset 0
    wait (b_sc >= 60);
    sc0 = b_sc; se0 = b_se;
    q_before = real'(se0) / real'(sc0);
    // offset search: try -1, -2, ... and keep the first with a low error rate
    for (int off = 1; off <= 4; off++) begin
      int c0, e0;
      reg_write(1, 8'h01, 16'(-off) & 16'h00ff);
      wait (u_bob.offset == 8'(-off));
      // discard statistics of frames numbered with the old offset
      begin
        logic [29:0] f_new;
        f_new = u_bob.u_sync_rec.frame + 2;
        wait (u_bob.u_sift.cur_frame >= f_new);
      end
      c0 = b_sc; e0 = b_se;
      wait (b_sc >= c0 + 60);
      q_after = real'(b_se - e0) / real'(b_sc - c0);
      $display("offset %0d: sampled error rate %0.3f", -off, q_after);
      if (q_after < 0.1) begin n_offset_fix++; break; end
    end
    checks++;
    if (q_before < 0.3 || q_after > 0.1) begin
      failures++; $display("FAIL error rate before %0.3f after %0.3f", q_before, q_after);
    end
    sc1 = b_sc; se1 = b_se;
    // run until both sides have amplified N_UNITS units
    wait (a_pau >= N_UNITS && b_pau >= N_UNITS);
    repeat (10) @(posedge clk);
    // polarization drift: the fibre now needs other controller codes; software turns
    // Alice's test light to H and starts Bob's polarization search
    hv_opt = '{48, 32, 64};
    drift0 = drift_pm();
    $display("after drift: extra error %0d per mille", drift0);
    reg_write(0, 8'h00, 16'h0003);
    wait (u_alice.test_light == 2'd1);
    repeat (2048) @(posedge clk);
    reg_write(1, 8'h00, 16'h0009);         // run, start search, H reference
    wait (b_pb);
    wait (!b_pb);
    reg_write(1, 8'h00, 16'h0001);
    n_pol_search = b_pd;
    $display("polarization search: done %0d fail %0d, codes %0d %0d %0d, extra error %0d per mille",
             b_pd, b_pf, b_hv[0], b_hv[1], b_hv[2], drift_pm());
    checks++;
    // the 2% base error of the channel keeps H:V below 150:1, so the search may end
    // with its fail flag; it must still have removed most of the drift error
    if (!(b_pd || b_pf) || drift_pm() * 3 > drift0) begin failures++; $display("FAIL polarization search"); end
    // with the test light on, Bob's H detector clicks and his V detector stays almost silent
    repeat (20000) @(posedge clk) begin
      if (b_click[0]) n_test_h++;
      if (b_click[1]) n_test_v++;
    end
    reg_write(0, 8'h00, 16'h0001);
    $display("test light: H clicks %0d, V clicks %0d", n_test_h, n_test_v);
    checks++;
    if (n_test_h < 100 || n_test_v * 10 > n_test_h) begin failures++; $display("FAIL test light"); end
    n_resync       = b_lost;
    n_ec_fix       = b_fix;
    n_ec_reject    = b_efl;
    n_ec_accept    = b_eok;
    n_pa           = a_pau;
    n_decoy_check  = b_dc;
    n_sample_check = b_sc;
    n_sift_budget_ok = (a_scy != 0 && a_scy <= 20 && b_scy != 0 && b_scy <= 20);
    $display("frames lost/resynchronised %0d, EC blocks accepted %0d rejected %0d, bits corrected %0d",
             n_resync, n_ec_accept, n_ec_reject, n_ec_fix);
    $display("signal samples %0d errors %0d (after offset fix %0d/%0d), decoy %0d errors %0d",
             b_sc, b_se, b_se - se1, b_sc - sc1, b_dc, b_de);
    $display("PA units %0d, final key bits Alice %0d Bob %0d, cycles %0d", n_pa, fk_a.size(), fk_b.size(), cyc);
    // mechanisms
    checks++; if (n_offset_fix == 0)   begin failures++; $display("FAIL offset never corrected"); end
    checks++; if (n_resync == 0)       begin failures++; $display("FAIL no frame resynchronisation"); end
    checks++; if (n_ec_fix == 0)       begin failures++; $display("FAIL no bit corrected"); end
    checks++; if (n_ec_reject == 0)    begin failures++; $display("FAIL no block rejected by CRC"); end
    checks++; if (n_ec_accept == 0)    begin failures++; $display("FAIL no block accepted"); end
    checks++; if (n_decoy_check == 0)  begin failures++; $display("FAIL no decoy statistics"); end
    checks++; if (!n_sift_budget_ok)   begin failures++; $display("FAIL sifting cycles %0d %0d", a_scy, b_scy); end
    checks++; if (a_eok != b_eok || a_efl != b_efl) begin failures++; $display("FAIL EC verdicts differ"); end
    checks++; if (a_tf || b_tf)        begin failures++; $display("FAIL TRNG alarm"); end
    // final keys: the units amplified while the test light ran are not compared
    while (fk_a.size() > N_UNITS * M_BITS) void'(fk_a.pop_back());
    while (fk_b.size() > N_UNITS * M_BITS) void'(fk_b.pop_back());
    checks++;
    if (fk_a.size() != N_UNITS * M_BITS || fk_b.size() != fk_a.size()) begin
      failures++; $display("FAIL final key lengths %0d %0d expected %0d", fk_a.size(), fk_b.size(), N_UNITS * M_BITS);
    end
    checks++;
    if (fk_a != fk_b) begin failures++; $display("FAIL final keys differ"); end
    begin
      int ones;
      ones = 0;
      foreach (fk_a[i]) ones += fk_a[i];
      checks++;
      if (fk_a.size() > 0 && (ones * 10 < fk_a.size() * 4 || ones * 10 > fk_a.size() * 6)) begin
        failures++; $display("FAIL final key unbalanced %0d of %0d", ones, fk_a.size());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
