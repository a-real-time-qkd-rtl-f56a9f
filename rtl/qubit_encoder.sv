// qubit_encoder: Alice's signal generation and synchronous coding.
//
// For each pulse slot the module takes five random bits, one from each of the five
// TRNGs the paper uses (5 x 20 Mbit/s = one 5-bit draw per 20 MHz pulse). Two bits
// pick the polarization H, V, P or N with equal probability (1:1:1:1) and three bits
// pick the intensity class with the paper's ratio signal:decoy:vacuum = 6:1:1
// (values 0..5 signal, 6 decoy, 7 vacuum; this mapping is this design's choice).
// The result is the 4-bit coding data {class, polarization} that is written to SRAM
// with the slot's location, and the laser drive: one-hot las_pol selects the laser
// of the polarization, las_decoy selects the weaker decoy intensity (the paper sets
// the signal to three times the decoy intensity, mean photon numbers 0.6 and 0.2),
// and a vacuum slot fires no laser. During polarization adjustment (test = 1 or 2)
// every slot is sent as H or as P signal light, as the paper describes.
// Timing: outputs are registered, one cycle after slot_valid.
module qubit_encoder
  import qkd_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               slot_valid,
  input  logic [POS_W-1:0]   pos_in,
  input  logic [FRAME_W-1:0] frame_in,
  input  logic [4:0]         rnd,       // [1:0] polarization, [4:2] intensity
  input  logic [1:0]         test,      // 0 random, 1 all H, 2 all P
  output logic               code_valid,
  output code_t              code,
  output logic [POS_W-1:0]   pos,
  output logic [FRAME_W-1:0] frame,
  output logic [3:0]         las_pol,   // one-hot H, V, P, N
  output logic               las_decoy
);
  code_t c;

  always_comb begin
    c.pol = pol_e'(rnd[1:0]);
    unique case (rnd[4:2])
      3'd6:    c.cls = CLS_DECOY;
      3'd7:    c.cls = CLS_VACUUM;
      default: c.cls = CLS_SIGNAL;
    endcase
    if (test == 2'd1) c = '{cls: CLS_SIGNAL, pol: POL_H};
    if (test == 2'd2) c = '{cls: CLS_SIGNAL, pol: POL_P};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code_valid <= 1'b0; code <= '0; pos <= '0; frame <= '0;
      las_pol <= '0; las_decoy <= 1'b0;
    end else begin
      code_valid <= slot_valid;
      code       <= c;
      pos        <= pos_in;
      frame      <= frame_in;
      las_pol    <= (slot_valid && c.cls != CLS_VACUUM) ? (4'b0001 << c.pol) : 4'b0000;
      las_decoy  <= slot_valid && (c.cls == CLS_DECOY);
    end
  end
endmodule
