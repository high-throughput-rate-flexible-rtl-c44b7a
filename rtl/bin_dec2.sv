// bin_dec2 -- decision logic of a size-2 binary polar code.
//
// Decides both bits of a T2 kernel directly from its two LLRs, with no
// arithmetic: u0 = (s(a0) xor s(a1)) & a[0], the sign of f; u1 is the sign
// of g = (1-2u0)*a0 + a1, which is s(a1) when |a1| >= |a0| and
// s(a0) xor u0 otherwise, masked by a[1]. One magnitude comparator, two XORs,
// a 2:1 multiplexer and two AND gates (frozen masks). a[k] = 0 marks a
// frozen bit, whose estimate is forced to 0. Combinational.
//
// The rule, including the tie case |a1| = |a0| resolved to s(a1), is the
// decoder's own decision equation for the size-2 code.
module bin_dec2 #(
  parameter int unsigned Q = mkpc_pkg::Q_DEF
) (
  input  logic [1:0][Q-1:0] alpha,
  input  logic [1:0]        a,
  output logic [1:0]        u
);
  logic s0, s1, ge;
  assign s0   = alpha[0][Q-1];
  assign s1   = alpha[1][Q-1];
  assign ge   = alpha[1][Q-2:0] >= alpha[0][Q-2:0];
  assign u[0] = (s0 ^ s1) & a[0];
  assign u[1] = (ge ? s1 : (s0 ^ u[0])) & a[1];
endmodule
