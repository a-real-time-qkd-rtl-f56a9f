// qkd_control_board: FPGA logic of one QKD system control board (Alice or Bob).
//
// The paper's control board carries two FPGAs: one for signal generation and sync
// coding, detector sampling, delay and polarization adjustment and sifting (with the
// coding-data SRAMs and the USB link to the single-board computer), one for error
// correction and privacy amplification. This top puts the logic of both in one module
// and, as the paper's chassis are "almost identical" on both sides, selects the role
// with the is_bob pin:
//   Alice: 5 x trng -> qubit_encoder (driven by sync_gen) -> lasers and code_store
//   Bob:   sync_recover (sync pulses, SPD clicks) -> det_coder -> code_store and the
//          upload FIFO of entries
//   both:  USB download sift FIFO -> sifting (reads code_store) -> reply upload FIFO
//          (Alice) and sifted-key FIFO -> reconciliation <-> USB EC ports (through
//          cmd_proc on the download side) -> privacy_amp -> final key bus
//   Bob:   pol_adjust, started by control register bit 3, steps the polarization
//          controller codes (hv_code) against the clicks of Alice's test light;
//          POL_WINDOW (slots per measurement) is this design's choice
// The PLL, SRAM chips, USB chip, optics, SPDs and the computer are outside: their
// signals are ports. One clock drives everything here, whereas the paper runs the
// photon and sync logic at 20 MHz, reconciliation at 80 MHz and privacy
// amplification at 40 MHz; one pulse slot is one clock of this design.
module qkd_control_board
  import qkd_pkg::*;
#(
  parameter int unsigned TRNG_SAMPLES = 8,
  parameter int unsigned SRAM_AW      = 21,
  parameter int unsigned EC_LW        = 12,
  parameter int unsigned EC_MAX_ITER  = 6,
  parameter int unsigned PA_N_BITS    = 262144,
  parameter int unsigned PA_BLK       = 40,
  parameter int unsigned FIFO_DEPTH   = 1024,
  parameter int unsigned POL_WINDOW   = 1 << 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          is_bob,
  // entropy: samples of the five TRNGs' jittered oscillators
  input  logic [4:0][TRNG_SAMPLES-1:0]  trng_raw,
  // Alice optics drive
  output logic                          sync_out,
  output logic [3:0]                    las_pol,
  output logic                          las_decoy,
  // Bob detector side
  input  logic                          sync_in,
  input  logic [3:0]                    spd_click,
  output logic [7:0]                    spd_delay,
  // coding-data SRAM
  output logic [SRAM_AW-1:0]            sram_addr,
  output logic [15:0]                   sram_dq_o,
  input  logic [15:0]                   sram_dq_i,
  output logic                          sram_we_n,
  output logic                          sram_oe_n,
  output logic                          sram_ce_n,
  // USB chip, slave FIFO mode
  output logic [1:0]                    usb_fifoadr,
  output logic                          usb_slrd_n,
  output logic                          usb_slwr_n,
  output logic                          usb_sloe_n,
  input  logic                          usb_flag_empty_n,
  input  logic                          usb_flag_full_n,
  input  logic [15:0]                   usb_fd_i,
  output logic [15:0]                   usb_fd_o,
  output logic                          usb_fd_oe,
  // final key bus to key management
  output logic                          fk_valid,
  output logic [PA_BLK-1:0]             fk_data,
  output logic [$clog2(PA_BLK+1)-1:0]   fk_bits,
  // status
  output logic [31:0]                   st_det_count,
  output logic [31:0]                   st_sift_key,
  output logic [31:0]                   st_sig_checked,
  output logic [31:0]                   st_sig_errors,
  output logic [31:0]                   st_dec_checked,
  output logic [31:0]                   st_dec_errors,
  output logic [15:0]                   st_ec_ok,
  output logic [15:0]                   st_ec_fail,
  output logic [31:0]                   st_ec_fixed,
  output logic [15:0]                   st_pa_units,
  output logic [15:0]                   st_lost_frames,
  output logic [7:0]                    st_sift_cycles,
  output logic                          st_trng_fail,
  // polarization controller drive (high-voltage module) and search status
  output logic [2:0][11:0]              hv_code,
  output logic                          st_pol_busy,
  output logic                          st_pol_done,
  output logic                          st_pol_fail
);
  localparam int unsigned FL = $clog2(FIFO_DEPTH) + 1;

  // ---------------- registers from the computer ----------------
  logic              run;
  logic [1:0]        test_light;
  logic              pol_req, pol_mode, pol_req_q;
  logic signed [7:0] offset;
  logic [3:0]        seg_log2;
  logic [15:0]       sfactor;
  logic [63:0]       seed;

  // ---------------- USB and its FIFOs ----------------
  logic        dls_in_v, dlc_in_v, dls_in_r, dlc_in_r;
  logic [15:0] dl_data;
  logic        dls_v, dls_r;   logic [15:0] dls_d;
  logic        dlc_v, dlc_r;   logic [15:0] dlc_d;
  logic        uls_in_v, uls_in_r; logic [15:0] uls_in_d;
  logic        uls_v, uls_r;   logic [15:0] uls_d;
  logic        ule_in_v, ule_in_r; logic [15:0] ule_in_d;
  logic        ule_v, ule_r;   logic [15:0] ule_d;
  logic [FL-1:0] lvl0, lvl1, lvl2, lvl3;

  usb_if u_usb (
    .clk, .rst_n,
    .fifoadr(usb_fifoadr), .slrd_n(usb_slrd_n), .slwr_n(usb_slwr_n), .sloe_n(usb_sloe_n),
    .flag_empty_n(usb_flag_empty_n), .flag_full_n(usb_flag_full_n),
    .fd_i(usb_fd_i), .fd_o(usb_fd_o), .fd_oe(usb_fd_oe),
    .dl_sift_valid(dls_in_v), .dl_sift_ready(dls_in_r),
    .dl_cmd_valid(dlc_in_v), .dl_cmd_ready(dlc_in_r), .dl_data,
    .ul_sift_valid(uls_v), .ul_sift_ready(uls_r), .ul_sift_data(uls_d),
    .ul_ec_valid(ule_v), .ul_ec_ready(ule_r), .ul_ec_data(ule_d));

  fifo #(.WIDTH(16), .DEPTH(FIFO_DEPTH)) u_dl_sift (.clk, .rst_n,
    .in_valid(dls_in_v), .in_ready(dls_in_r), .in_data(dl_data),
    .out_valid(dls_v), .out_ready(dls_r), .out_data(dls_d), .level(lvl0));
  fifo #(.WIDTH(16), .DEPTH(FIFO_DEPTH)) u_dl_cmd (.clk, .rst_n,
    .in_valid(dlc_in_v), .in_ready(dlc_in_r), .in_data(dl_data),
    .out_valid(dlc_v), .out_ready(dlc_r), .out_data(dlc_d), .level(lvl1));
  fifo #(.WIDTH(16), .DEPTH(FIFO_DEPTH)) u_ul_sift (.clk, .rst_n,
    .in_valid(uls_in_v), .in_ready(uls_in_r), .in_data(uls_in_d),
    .out_valid(uls_v), .out_ready(uls_r), .out_data(uls_d), .level(lvl2));
  fifo #(.WIDTH(16), .DEPTH(FIFO_DEPTH)) u_ul_ec (.clk, .rst_n,
    .in_valid(ule_in_v), .in_ready(ule_in_r), .in_data(ule_in_d),
    .out_valid(ule_v), .out_ready(ule_r), .out_data(ule_d), .level(lvl3));

  // ---------------- command processing ----------------
  logic        ecm_v, ecm_r; logic [15:0] ecm_d;
  logic [15:0] bad_packets;
  cmd_proc u_cmd (.clk, .rst_n,
    .in_valid(dlc_v), .in_ready(dlc_r), .in_data(dlc_d),
    .ec_valid(ecm_v), .ec_ready(ecm_r), .ec_data(ecm_d),
    .run, .test_light, .pol_req, .pol_mode, .offset, .seg_log2, .sfactor, .seed, .delay(spd_delay), .bad_packets);

  // ---------------- Alice: TRNG, sync generation, encoding ----------------
  logic [4:0] rnd, rep_fail;
  for (genvar g = 0; g < 5; g++) begin : g_trng
    trng #(.SAMPLES(TRNG_SAMPLES)) u_trng (.clk, .rst_n, .raw(trng_raw[g]),
      .rnd(rnd[g]), .rep_fail(rep_fail[g]));
  end
  assign st_trng_fail = |rep_fail;

  logic               a_slot, a_sync, a_cv;
  logic [POS_W-1:0]   a_pos, a_cpos;
  logic [FRAME_W-1:0] a_frame, a_cframe;
  code_t              a_code;
  logic [3:0]         a_las;
  logic               a_dec;

  sync_gen u_sync_gen (.clk, .rst_n, .run(run && !is_bob), .sync_out(a_sync),
    .slot_valid(a_slot), .pos(a_pos), .frame(a_frame));
  qubit_encoder u_enc (.clk, .rst_n, .slot_valid(a_slot), .pos_in(a_pos), .frame_in(a_frame),
    .rnd, .test(test_light), .code_valid(a_cv), .code(a_code), .pos(a_cpos), .frame(a_cframe),
    .las_pol(a_las), .las_decoy(a_dec));

  // the sync pulse is delayed one clock to line up with the laser drive
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync_out <= 1'b0;
    else        sync_out <= a_sync && !is_bob;
  end
  assign las_pol   = is_bob ? 4'b0 : a_las;
  assign las_decoy = !is_bob && a_dec;

  // ---------------- Bob: frame recovery and detector coding ----------------
  logic               b_slot, b_hv, b_cv;
  logic [POS_W-1:0]   b_pos, b_cpos;
  logic [FRAME_W-1:0] b_frame, b_cframe;
  logic [3:0]         b_clicks;
  logic [15:0]        b_head;
  code_t              b_code;
  logic               b_ov; logic [15:0] b_od;
  logic [31:0]        multi_count;
  logic [15:0]        det_overflow;

  sync_recover u_sync_rec (.clk, .rst_n, .run(run && is_bob), .sync_in, .clicks_in(spd_click),
    .offset, .slot_valid(b_slot), .pos(b_pos), .frame(b_frame), .clicks(b_clicks),
    .head_valid(b_hv), .head_word(b_head), .lost_frames(st_lost_frames));
  det_coder u_det (.clk, .rst_n, .slot_valid(b_slot), .pos_in(b_pos), .frame_in(b_frame),
    .clicks(b_clicks), .head_valid(b_hv), .head_word(b_head),
    .code_valid(b_cv), .code(b_code), .pos(b_cpos), .frame(b_cframe),
    .out_valid(b_ov), .out_ready(uls_in_r), .out_data(b_od),
    .det_count(st_det_count), .multi_count, .overflow(det_overflow));

  // ---------------- polarization feedback (Bob) ----------------
  logic [31:0] pol_right, pol_wrong;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) pol_req_q <= 1'b0;
    else        pol_req_q <= pol_req;
  pol_adjust #(.WINDOW(POL_WINDOW)) u_pol (.clk, .rst_n, .start(pol_req && !pol_req_q && is_bob), .mode(pol_mode),
    .load(1'b0), .hv_init('0), .slot_valid(b_slot), .clicks(b_clicks),
    .hv_code, .busy(st_pol_busy), .done(st_pol_done), .fail(st_pol_fail),
    .right_cnt(pol_right), .wrong_cnt(pol_wrong));

  // ---------------- coding-data storage ----------------
  logic               rd_req, rd_ready, rd_ack;
  logic [POS_W-1:0]   rd_pos;
  logic [FRAME_W-1:0] rd_frame;
  code_t              rd_code;
  logic [15:0]        wr_overrun;

  code_store #(.AW(SRAM_AW)) u_store (.clk, .rst_n,
    .wr_valid(is_bob ? b_cv : a_cv), .wr_code(is_bob ? b_code : a_code),
    .wr_pos(is_bob ? b_cpos : a_cpos), .wr_frame(is_bob ? b_cframe : a_cframe),
    .rd_req, .rd_ready, .rd_pos, .rd_frame, .rd_ack, .rd_code,
    .sram_addr, .sram_dq_o, .sram_dq_i, .sram_we_n, .sram_oe_n, .sram_ce_n, .wr_overrun);

  // ---------------- sifting ----------------
  logic        s_ov, s_or; logic [15:0] s_od;
  logic        sk_v, sk_r, sk_b;
  logic        kf_v, kf_r, kf_b;
  logic [31:0] vac_count;
  logic [13:0] lvl_k;

  sifting u_sift (.clk, .rst_n, .is_bob,
    .in_valid(dls_v), .in_ready(dls_r), .in_data(dls_d),
    .out_valid(s_ov), .out_ready(s_or), .out_data(s_od),
    .key_valid(sk_v), .key_ready(sk_r), .key_bit(sk_b),
    .rd_req, .rd_ready, .rd_pos, .rd_frame, .rd_ack, .rd_code,
    .n_entries(), .n_key(st_sift_key), .sig_checked(st_sig_checked), .sig_errors(st_sig_errors),
    .dec_checked(st_dec_checked), .dec_errors(st_dec_errors), .vac_count,
    .last_cycles(st_sift_cycles));

  // upload sift FIFO: Bob's entries or Alice's replies
  assign uls_in_v = is_bob ? b_ov : s_ov;
  assign uls_in_d = is_bob ? b_od : s_od;
  // sifting may only produce a reply when the FIFO has room for it
  assign s_or     = is_bob || (lvl2 < FL'(FIFO_DEPTH - 4));

  fifo #(.WIDTH(1), .DEPTH(8192)) u_key_fifo (.clk, .rst_n,
    .in_valid(sk_v), .in_ready(), .in_data(sk_b),
    .out_valid(kf_v), .out_ready(kf_r), .out_data(kf_b), .level(lvl_k));
  assign sk_r = (lvl_k < 14'(8192 - 4));

  // ---------------- reconciliation ----------------
  logic ck_v, ck_r, ck_b;
  logic [3:0] last_iters;
  reconciliation #(.LW(EC_LW), .MAX_ITER(EC_MAX_ITER)) u_ec (.clk, .rst_n, .is_bob, .seg_log2,
    .key_in_valid(kf_v), .key_in_ready(kf_r), .key_in_bit(kf_b),
    .msg_in_valid(ecm_v), .msg_in_ready(ecm_r), .msg_in_data(ecm_d),
    .msg_out_valid(ule_in_v), .msg_out_ready(ule_in_r), .msg_out_data(ule_in_d),
    .key_out_valid(ck_v), .key_out_ready(ck_r), .key_out_bit(ck_b),
    .blocks_ok(st_ec_ok), .blocks_fail(st_ec_fail), .bits_fixed(st_ec_fixed), .last_iters);

  // ---------------- privacy amplification ----------------
  logic        pa_busy;
  logic [31:0] pa_cycles;
  privacy_amp #(.N_BITS(PA_N_BITS), .BLK(PA_BLK)) u_pa (.clk, .rst_n, .sfactor, .seed,
    .key_valid(ck_v), .key_ready(ck_r), .key_bit(ck_b),
    .fk_valid, .fk_data, .fk_bits, .busy(pa_busy), .last_mul_cycles(pa_cycles),
    .units_done(st_pa_units));
endmodule
