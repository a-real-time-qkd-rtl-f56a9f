// ec_permute: permutation of the key between reconciliation iterations.
//
// The paper performs one permutation between every two neighbouring iterations, so
// errors that hid in pairs are spread into different segments. It does not give the
// permutation. Here permutation t maps logical bit i to stored bit
// p_t(i) = (a_t * i + b_t) mod L, an affine map that is a bijection because a_t is odd
// and L is a power of two. Moving to the next iteration composes one more fixed map
// i -> A*i + B:  a_(t+1) = a_t * A,  b_(t+1) = a_t * B + b_t  (mod L). Because both
// sides step the same way no key bits are moved: only addresses change.
// Timing: addr is combinational from idx; next/restart act at the clock edge.
module ec_permute #(
  parameter int unsigned LW = 12,            // L = 2**LW
  parameter logic [31:0] A  = 32'h9E3779B9,  // odd multiplier, low LW bits used
  parameter logic [31:0] B  = 32'h7F4A7C15
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          restart,
  input  logic          next,
  input  logic [LW-1:0] idx,
  output logic [LW-1:0] addr
);
  logic [LW-1:0] a, b;
  logic [2*LW-1:0] prod;
  assign prod = a * idx;
  assign addr = prod[LW-1:0] + b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a <= LW'(1);
      b <= '0;
    end else if (restart) begin
      a <= LW'(1);
      b <= '0;
    end else if (next) begin
      a <= LW'(a * A[LW-1:0]);
      b <= LW'(a * B[LW-1:0]) + b;
    end
  end
endmodule
