// g2t_stage -- ternary g2 function (right-branch LLRs) over M triples.
//
// Output i = (1 - 2*beta_l[i]) * alpha[i+M]
//          + (1 - 2*(beta_l[i] xor beta_c[i])) * alpha[i+2M],
// with beta_l and beta_c the codewords of the left and middle children.
// Both products are sign flips; the sum saturates to Q bits. Combinational.
module g2t_stage #(
  parameter int unsigned Q = mkpc_pkg::Q_DEF,
  parameter int unsigned M = 1
) (
  input  logic [3*M-1:0][Q-1:0] alpha,
  input  logic [M-1:0]          beta_l,
  input  logic [M-1:0]          beta_c,
  output logic [M-1:0][Q-1:0]   alpha_r
);
  for (genvar i = 0; i < M; i++) begin : g_el
    sm_add #(.Q(Q)) u_add (
      .a({alpha[i+M][Q-1] ^ beta_l[i], alpha[i+M][Q-2:0]}),
      .b({alpha[i+2*M][Q-1] ^ beta_l[i] ^ beta_c[i], alpha[i+2*M][Q-2:0]}),
      .s(alpha_r[i])
    );
  end
endmodule
