// crc32: bit-serial CRC-32 used for the final check of reconciliation.
//
// The paper ends reconciliation with a CRC check of the corrected key but does not
// name the polynomial; this design uses the common CRC-32 (reflected polynomial
// 0xEDB88320, initial value all ones, final XOR all ones). One key bit per clock
// (en); clr restarts. crc is the finished value of the bits fed so far.
module crc32 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic        en,
  input  logic        din,
  output logic [31:0] crc
);
  logic [31:0] r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     r <= '1;
    else if (clr)   r <= '1;
    else if (en)    r <= (r >> 1) ^ ((r[0] ^ din) ? 32'hEDB88320 : 32'h0);
  end
  assign crc = ~r;
endmodule
