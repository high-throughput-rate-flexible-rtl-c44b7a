// g1t_stage -- ternary g1 function (middle-branch LLRs) over M triples.
//
// Output i = (1 - 2*beta_l[i]) * alpha[i] + f^b(alpha[i+M], alpha[i+2M]),
// where beta_l is the codeword decided by the left child. The f^b term is an
// fb_stage over the upper two thirds of the vector; the sum is a saturating
// sign-magnitude adder. Combinational.
module g1t_stage #(
  parameter int unsigned Q = mkpc_pkg::Q_DEF,
  parameter int unsigned M = 1
) (
  input  logic [3*M-1:0][Q-1:0] alpha,
  input  logic [M-1:0]          beta_l,
  output logic [M-1:0][Q-1:0]   alpha_c
);
  logic [M-1:0][Q-1:0] fpart;

  // alpha[3M-1:M] holds alpha[i+M] as its element i and alpha[i+2M] as i+M.
  fb_stage #(.Q(Q), .M(M)) u_f (.alpha(alpha[3*M-1:M]), .alpha_l(fpart));

  for (genvar i = 0; i < M; i++) begin : g_el
    sm_add #(.Q(Q)) u_add (
      .a({alpha[i][Q-1] ^ beta_l[i], alpha[i][Q-2:0]}),
      .b(fpart[i]),
      .s(alpha_c[i])
    );
  end
endmodule
