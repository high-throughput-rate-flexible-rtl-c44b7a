// ter_ctrl -- control logic of the size-3 ternary decision circuit.
//
// From the three LLR magnitudes it derives the two multiplexer selects of
// ter_dec3:
//   m0 = (|a0| >= |a1| and |a2| >= |a1|) or (|a0| >= |a2| and |a1| >= |a2|)
//        i.e. |a0| is not below the smaller of |a1|, |a2|, so the middle
//        bit follows the a0 branch of g1;
//   m1 = |a1| >= |a2|, so the right bit follows the a1 term of g2.
// Three magnitude comparators and a few gates. Combinational.
module ter_ctrl #(
  parameter int unsigned Q = mkpc_pkg::Q_DEF
) (
  input  logic [2:0][Q-2:0] mag,
  output logic              m0,
  output logic              m1
);
  logic c01, c12, c02;
  assign c01 = mag[0] >= mag[1];
  assign c12 = mag[1] >= mag[2];
  assign c02 = mag[0] >= mag[2];
  assign m0  = (c01 & (mag[2] >= mag[1])) | (c02 & c12);
  assign m1  = c12;
endmodule
