// fb_stage -- binary f function (left-branch LLRs) over M element pairs.
//
// For a node holding 2M LLRs, output i is the min-sum check of the two
// halves: sign = sign(alpha[i]) xor sign(alpha[i+M]), magnitude =
// min(|alpha[i]|, |alpha[i+M]|). Each element is one magnitude comparator and
// a multiplexer, as in the decoder's description of f^b. Combinational.
//
// Interface: alpha is the node's LLR vector (element i = alpha[i]), alpha_l
// the M LLRs passed to the left child. LLRs are Q-bit sign-magnitude.
module fb_stage #(
  parameter int unsigned Q = mkpc_pkg::Q_DEF,
  parameter int unsigned M = 1
) (
  input  logic [2*M-1:0][Q-1:0] alpha,
  output logic [M-1:0][Q-1:0]   alpha_l
);
  for (genvar i = 0; i < M; i++) begin : g_el
    logic [Q-2:0] ma, mb;
    assign ma = alpha[i][Q-2:0];
    assign mb = alpha[i+M][Q-2:0];
    assign alpha_l[i] = {alpha[i][Q-1] ^ alpha[i+M][Q-1], (ma <= mb) ? ma : mb};
  end
endmodule
