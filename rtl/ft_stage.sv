// ft_stage -- ternary f function (left-branch LLRs) over M element triples.
//
// For a node of 3M LLRs, output i has sign = xor of the signs of alpha[i],
// alpha[i+M], alpha[i+2M] and magnitude = the smallest of their three
// magnitudes (two comparators and a multiplexer per element).
// Combinational; Q-bit sign-magnitude LLRs.
module ft_stage #(
  parameter int unsigned Q = mkpc_pkg::Q_DEF,
  parameter int unsigned M = 1
) (
  input  logic [3*M-1:0][Q-1:0] alpha,
  output logic [M-1:0][Q-1:0]   alpha_l
);
  for (genvar i = 0; i < M; i++) begin : g_el
    logic [Q-2:0] m0, m1, m2, m01;
    assign m0  = alpha[i][Q-2:0];
    assign m1  = alpha[i+M][Q-2:0];
    assign m2  = alpha[i+2*M][Q-2:0];
    assign m01 = (m0 <= m1) ? m0 : m1;
    assign alpha_l[i] = {alpha[i][Q-1] ^ alpha[i+M][Q-1] ^ alpha[i+2*M][Q-1],
                         (m01 <= m2) ? m01 : m2};
  end
endmodule
