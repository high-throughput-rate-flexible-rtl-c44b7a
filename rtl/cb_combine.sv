// cb_combine -- binary combine C^b: merges two child codewords of M bits.
//
// beta[i] = beta_l[i] xor beta_r[i] and beta[i+M] = beta_r[i], i.e. one
// layer of XOR gates (the re-encoding step of the T2 kernel). Used instead
// of a full size-M encoder between decoder stages. Combinational.
// The upper half of the output is a plain wire from beta_r: that is the
// kernel's definition, not a missing gate, so a synthesis report shows
// those bits with no logic in front of them.
module cb_combine #(
  parameter int unsigned M = 1
) (
  input  logic [M-1:0]   beta_l,
  input  logic [M-1:0]   beta_r,
  output logic [2*M-1:0] beta
);
  assign beta[M-1:0]   = beta_l ^ beta_r;
  assign beta[2*M-1:M] = beta_r;
endmodule
