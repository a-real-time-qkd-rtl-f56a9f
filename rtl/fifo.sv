// fifo: synchronous first-in first-out buffer with a valid/ready stream on each side.
//
// Used wherever the paper's block diagrams draw a FIFO (coding data to SRAM, the USB
// ports, the reconciliation input and output). Storage is an array of DEPTH words
// (DEPTH a power of two) with read and write pointers one bit wider than the address.
// in_ready is low when full; out_valid is high when not empty and out_data shows the
// oldest word (first-word fall-through). A word written in cycle t can be read in t+1.
// The depth is this design's choice; the paper gives none.
module fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] level
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wp, rp;

  assign level     = wp - rp;
  assign in_ready  = (level != (AW+1)'(DEPTH));
  assign out_valid = (wp != rp);
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end

  // The producer must not push into a full FIFO and expect it to be taken.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (level <= (AW+1)'(DEPTH)));
endmodule
