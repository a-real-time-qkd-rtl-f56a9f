// sram_model: behavioural model of the coding-data SRAM (two 16 Mbit chips seen as one
// 2 M x 16 memory) with the synchronous timing the controller assumes: a write is
// taken at the clock edge where ce_n and we_n are low; for a read (ce_n, oe_n low)
// the data of the addressed word appears on dq_o after the edge, for one cycle.
// Not synthesizable logic of the design: it stands for an external chip.
module sram_model #(
  parameter int unsigned AW = 21
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  input  logic [15:0]   dq_i,
  output logic [15:0]   dq_o,
  input  logic          we_n,
  input  logic          oe_n,
  input  logic          ce_n
);
  logic [15:0] mem [1 << AW];
  initial for (int i = 0; i < (1 << AW); i++) mem[i] = '0;
  always @(posedge clk) begin
    if (!ce_n && !we_n) mem[addr] <= dq_i;
    if (!ce_n && !oe_n && we_n) dq_o <= mem[addr];
    else                        dq_o <= 16'hDEAD;
  end
endmodule
