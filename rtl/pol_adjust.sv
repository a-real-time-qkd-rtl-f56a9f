// pol_adjust: polarization feedback on Bob's board.
//
// When the error rate passes its threshold, software switches Alice to a reference
// light (all H, or all P, signal pulses) and starts this block. It counts, over
// WINDOW pulse slots, Bob's clicks on the detector that matches the reference (H or
// P, "right") and on the orthogonal one (V or N, "wrong"), and steps the drive codes
// of the NCTRL polarization controllers until right >= RATIO * wrong. The codes go to
// the high-voltage module (hv_code). The paper gives the goal (the H:V or P:N
// proportion reaching a preset value, usually 150:1) but not the search; the search
// here is the simplest that converges on a smooth error surface: coordinate descent.
// For controller c it tries +STEP and keeps stepping while the wrong-click fraction
// falls; if +STEP made it worse it tries -STEP the same way; then it moves to the
// next controller. After MAX_ROUNDS controller visits without reaching the ratio it
// stops with fail set. The codes are held after the search, as in the paper, and can
// be preloaded by software through hv_init/load. Codes saturate at 0 and 2**DW - 1;
// an undo after a saturated step is therefore approximate.
// Interface: start (one-clock pulse) and mode (0 = H reference: detectors 0/1,
// 1 = P reference: detectors 2/3); slot_valid/clicks is Bob's slot stream; busy,
// done, fail and the last window's counts are status. Timing: one window per trial
// plus two clocks, so a search takes (trials + 1) * (WINDOW + 2) clocks.
module pol_adjust #(
  parameter int unsigned NCTRL      = 3,       // polarization controllers
  parameter int unsigned DW         = 12,      // drive code width (DAC bits)
  parameter int unsigned WINDOW     = 1 << 20, // pulse slots per measurement (52 ms at 20 MHz)
  parameter int unsigned RATIO      = 150,     // target right:wrong
  parameter int unsigned STEP       = 16,      // code step per trial
  parameter int unsigned MAX_ROUNDS = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // control
  input  logic                      start,
  input  logic                      mode,
  input  logic                      load,
  input  logic [NCTRL-1:0][DW-1:0]  hv_init,
  // Bob's slot stream
  input  logic                      slot_valid,
  input  logic [3:0]                clicks,
  // drive codes for the high-voltage module
  output logic [NCTRL-1:0][DW-1:0]  hv_code,
  // status
  output logic                      busy,
  output logic                      done,
  output logic                      fail,
  output logic [31:0]               right_cnt,
  output logic [31:0]               wrong_cnt
);
  localparam int unsigned CW = $clog2(WINDOW + 1);
  localparam int unsigned RW = $clog2(MAX_ROUNDS + 1);
  localparam int unsigned IW = (NCTRL > 1) ? $clog2(NCTRL) : 1;

  typedef enum logic [1:0] {A_IDLE, A_MEAS, A_EVAL} ast_e;
  typedef enum logic [1:0] {PH_BASE, PH_UP, PH_DOWN} aph_e;
  ast_e st;
  aph_e ph;

  logic [CW-1:0] slots, r_cnt, w_cnt, r_base, w_base;
  logic [IW-1:0] c;
  logic [RW-1:0] rounds;
  logic          right_click, wrong_click, better, good;
  logic          moved;    // the current direction improved at least once

  // drive codes saturate at both ends of the DAC range instead of wrapping
  function automatic logic [DW-1:0] step_code(input logic [DW-1:0] v, input logic up, input logic [DW:0] n);
    logic [DW:0] r;
    if (up) begin
      r = {1'b0, v} + n;
      return r[DW] ? '1 : r[DW-1:0];
    end else begin
      r = {1'b0, v} - n;
      return r[DW] ? '0 : r[DW-1:0];
    end
  endfunction

  assign right_click = mode ? clicks[2] : clicks[0];
  assign wrong_click = mode ? clicks[3] : clicks[1];
  // new window better than base: lower wrong fraction, compared without division
  assign better = ((2*CW)'(w_cnt) * (2*CW)'(r_base + w_base)) <
                  ((2*CW)'(w_base) * (2*CW)'(r_cnt + w_cnt));
  assign good   = ((CW+8)'(r_cnt) >= (CW+8)'(w_cnt) * (CW+8)'(RATIO)) && (r_cnt != '0);
  assign busy   = (st != A_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; ph <= PH_BASE; slots <= '0; r_cnt <= '0; w_cnt <= '0;
      r_base <= '0; w_base <= '0; c <= '0; rounds <= '0; moved <= 1'b0;
      hv_code <= '0; done <= 1'b0; fail <= 1'b0; right_cnt <= '0; wrong_cnt <= '0;
    end else begin
      unique case (st)
        A_IDLE: begin
          if (load) hv_code <= hv_init;
          if (start) begin
            st <= A_MEAS; ph <= PH_BASE; c <= '0; rounds <= '0; moved <= 1'b0;
            done <= 1'b0; fail <= 1'b0;
            slots <= '0; r_cnt <= '0; w_cnt <= '0;
          end
        end
        A_MEAS: if (slot_valid) begin
          slots <= slots + 1'b1;
          if (right_click && !wrong_click) r_cnt <= r_cnt + 1'b1;
          if (wrong_click && !right_click) w_cnt <= w_cnt + 1'b1;
          if (slots == CW'(WINDOW - 1)) st <= A_EVAL;
        end
        A_EVAL: begin
          right_cnt <= 32'(r_cnt);
          wrong_cnt <= 32'(w_cnt);
          st    <= A_MEAS;
          slots <= '0; r_cnt <= '0; w_cnt <= '0;
          if (ph == PH_BASE || better) begin
            // keep this setting
            r_base <= r_cnt; w_base <= w_cnt;
            if (good) begin
              st <= A_IDLE; done <= 1'b1;
            end else if (ph == PH_DOWN) begin
              hv_code[c] <= step_code(hv_code[c], 1'b0, (DW+1)'(STEP)); moved <= 1'b1;
            end else begin
              hv_code[c] <= step_code(hv_code[c], 1'b1, (DW+1)'(STEP)); moved <= (ph == PH_UP);
              ph <= PH_UP;
            end
          end else if (ph == PH_UP && !moved) begin
            // the first step up made it worse: try downwards
            hv_code[c] <= step_code(hv_code[c], 1'b0, (DW+1)'(2 * STEP));
            ph <= PH_DOWN;
          end else begin
            // this direction stopped improving: undo the last step, next controller
            hv_code[c] <= step_code(hv_code[c], ph != PH_UP, (DW+1)'(STEP));
            rounds <= rounds + 1'b1;
            if (rounds == RW'(MAX_ROUNDS - 1)) begin
              st <= A_IDLE; fail <= 1'b1;
            end else begin
              // the undo and the first step of the next controller are separate codes
              c     <= (c == IW'(NCTRL - 1)) ? '0 : c + 1'b1;
              ph    <= PH_BASE;
              moved <= 1'b0;
            end
          end
        end
        default: st <= A_IDLE;
      endcase
    end
  end
endmodule
