// ter_dec3 -- decision logic of a size-3 ternary polar code.
//
// Decides the three bits of a T3 kernel from its three LLRs without adders:
//   u0 = s0 ^ s1 ^ s2                        (sign of f^t)
//   u1 = m0 ? s0 ^ u0 : s1 ^ s2              (sign of g1^t)
//   u2 = m1 ? s1 ^ u0 : s2 ^ u0 ^ u1         (sign of g2^t)
// each masked by its frozen indicator a[k] (0 = frozen, estimate 0).
// s_k is the sign bit of LLR k; m0 and m1 come from ter_ctrl.
// Combinational.
module ter_dec3 #(
  parameter int unsigned Q = mkpc_pkg::Q_DEF
) (
  input  logic [2:0][Q-1:0] alpha,
  input  logic [2:0]        a,
  output logic [2:0]        u
);
  logic s0, s1, s2, m0, m1;
  assign s0 = alpha[0][Q-1];
  assign s1 = alpha[1][Q-1];
  assign s2 = alpha[2][Q-1];

  ter_ctrl #(.Q(Q)) u_ctrl (
    .mag({alpha[2][Q-2:0], alpha[1][Q-2:0], alpha[0][Q-2:0]}),
    .m0 (m0),
    .m1 (m1)
  );

  assign u[0] = (s0 ^ s1 ^ s2) & a[0];
  assign u[1] = (m0 ? (s0 ^ u[0]) : (s1 ^ s2)) & a[1];
  assign u[2] = (m1 ? (s1 ^ u[0]) : (s2 ^ u[0] ^ u[1])) & a[2];
endmodule
