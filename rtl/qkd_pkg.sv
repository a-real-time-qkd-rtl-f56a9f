// qkd_pkg: types and constants shared by the QKD control-board RTL.
//
// Frame format (from the paper): one sync frame is K = 1018 pulse clocks followed by
// N = 6 clocks with no sync pulse; each frame head is 32 bits and each detected pulse
// is coded with 16 bits on the classical channel. The exact bit layout of those words
// is this design's own choice and is defined here:
//   Bob entry   (16 bit) : {2'b01, pos[9:0], basis, 3'b000}
//   Alice reply (16 bit) : {2'b01, pos[9:0], cls[1:0], reveal, bit}
//   frame head  (32 bit) : {2'b10, frame[29:0]} sent as two 16-bit words, high first
// The 4-bit per-pulse coding data is {cls[1:0], pol[1:0]}: 2 bits for the four
// polarizations and 2 bits for signal / decoy / vacuum, as the paper states.
package qkd_pkg;

  localparam int unsigned K_SLOTS = 1018;   // pulse clocks per frame (paper)
  localparam int unsigned N_GAP   = 6;      // low clocks per frame (paper)
  localparam int unsigned POS_W   = 10;     // position within a frame, 0..1017
  localparam int unsigned FRAME_W = 30;     // frame number carried in a 32-bit head

  typedef enum logic [1:0] {
    CLS_SIGNAL = 2'd0,
    CLS_DECOY  = 2'd1,
    CLS_VACUUM = 2'd2,
    CLS_NONE   = 2'd3    // Bob side: no usable detection in this slot
  } cls_e;

  // pol[1] is the basis (0: H/V, 1: P/N), pol[0] the bit value.
  typedef enum logic [1:0] {
    POL_H = 2'd0,
    POL_V = 2'd1,
    POL_P = 2'd2,
    POL_N = 2'd3
  } pol_e;

  typedef struct packed {
    cls_e cls;
    pol_e pol;
  } code_t;

  localparam logic [1:0] TAG_ENTRY = 2'b01;
  localparam logic [1:0] TAG_HEAD  = 2'b10;

  typedef struct packed {
    logic [1:0]       tag;
    logic [POS_W-1:0] pos;
    logic             basis;
    logic [2:0]       rsv;
  } bob_entry_t;

  typedef struct packed {
    logic [1:0]       tag;
    logic [POS_W-1:0] pos;
    cls_e             cls;
    logic             reveal;
    logic             bitv;
  } alice_reply_t;

  // Download packets on the shared error-correction / command port:
  // header {type[3:0], len[11:0]} followed by len payload words.
  typedef enum logic [3:0] {
    PKT_EC  = 4'h0,   // payload goes to the reconciliation block
    PKT_REG = 4'h1    // payload is pairs {addr, data} of register writes
  } pkt_type_e;

  // Command register map
  localparam logic [7:0] REG_CTRL     = 8'h00; // [0] run, [2:1] test light (0 random, 1 H, 2 P),
                                                 // [3] polarization search (starts on 0->1), [4] its reference: 0 H, 1 P
  localparam logic [7:0] REG_OFFSET   = 8'h01; // signed bit-number offset of Bob
  localparam logic [7:0] REG_SEGLOG2  = 8'h02; // first reconciliation segment length = 2**value
  localparam logic [7:0] REG_SFACTOR  = 8'h03; // PA secure factor, unsigned Q0.16
  localparam logic [7:0] REG_SEED0    = 8'h04; // PA random generator seed, 4 x 16 bit
  localparam logic [7:0] REG_SEED1    = 8'h05;
  localparam logic [7:0] REG_SEED2    = 8'h06;
  localparam logic [7:0] REG_SEED3    = 8'h07;
  localparam logic [7:0] REG_DELAY    = 8'h08; // SPD trigger delay, set by software

  function automatic logic [15:0] head_hi(input logic [FRAME_W-1:0] f);
    return {TAG_HEAD, f[FRAME_W-1:16]};
  endfunction

  function automatic logic [15:0] head_lo(input logic [FRAME_W-1:0] f);
    return f[15:0];
  endfunction

endpackage
