// ec_parity: parity of one key segment, the parity-comparison unit of reconciliation.
//
// The paper's reconciliation splits the key into segments and compares the parity of
// each segment pair between Alice and Bob. This unit accumulates the parity of the
// bits fed to it one per clock (en), is cleared by clr, and flags a mismatch against
// the other side's parity bit. Timing: parity is updated at the clock edge after en;
// mismatch is combinational.
module ec_parity (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic en,
  input  logic din,
  input  logic other,
  output logic parity,
  output logic mismatch
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   parity <= 1'b0;
    else if (clr) parity <= 1'b0;
    else if (en)  parity <= parity ^ din;
  end
  assign mismatch = parity ^ other;
endmodule
