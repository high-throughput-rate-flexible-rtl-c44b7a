// ct_combine -- ternary combine C^t: merges three child codewords of M bits.
//
// For each i: beta[i] = l xor c, beta[i+M] = l xor r, beta[i+2M] =
// l xor c xor r (l, c, r = left, middle, right child bit i). This is the
// re-encoding by the kernel T3 = [1 1 1; 1 0 1; 0 1 1]. Combinational.
module ct_combine #(
  parameter int unsigned M = 1
) (
  input  logic [M-1:0]   beta_l,
  input  logic [M-1:0]   beta_c,
  input  logic [M-1:0]   beta_r,
  output logic [3*M-1:0] beta
);
  assign beta[M-1:0]     = beta_l ^ beta_c;
  assign beta[2*M-1:M]   = beta_l ^ beta_r;
  assign beta[3*M-1:2*M] = beta_l ^ beta_c ^ beta_r;
endmodule
