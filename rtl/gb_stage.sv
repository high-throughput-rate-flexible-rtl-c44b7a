// gb_stage -- binary g function (right-branch LLRs) over M element pairs.
//
// Output i = (1 - 2*beta[i]) * alpha[i] + alpha[i+M], where beta is the
// codeword already decided by the left child (the partial sums). Flipping by
// (1 - 2*beta) is an inversion of the sign bit; the addition is a
// saturating sign-magnitude adder (sm_add). Combinational.
//
// Pairing element i with i+M (the two halves of the node) follows the
// decoder's recursive structure; the saturation to Q bits is this design's
// reading of the equal channel/internal LLR widths.
module gb_stage #(
  parameter int unsigned Q = mkpc_pkg::Q_DEF,
  parameter int unsigned M = 1
) (
  input  logic [2*M-1:0][Q-1:0] alpha,
  input  logic [M-1:0]          beta,
  output logic [M-1:0][Q-1:0]   alpha_r
);
  for (genvar i = 0; i < M; i++) begin : g_el
    sm_add #(.Q(Q)) u_add (
      .a({alpha[i][Q-1] ^ beta[i], alpha[i][Q-2:0]}),
      .b(alpha[i+M]),
      .s(alpha_r[i])
    );
  end
endmodule
