// bin_pre4 -- size-4 binary building block with pre-computation.
//
// Decodes a T2 x T2 sub-code of four LLRs in one combinational pass:
//   * f^b over the two halves feeds one size-2 decision circuit, giving the
//     left bits; C^b turns them into the left codeword v' (2 bits);
//   * four g^b copies are evaluated at the same time, one for each possible
//     v' (00, 01, 10, 11), each followed by its own size-2 decision circuit;
//   * v' selects one of the four right results through a 4:1 multiplexer
//     (select = 2*v'[0] + v'[1]); C^b turns it into v''.
// This removes the g adder from the path after the left decision.
//
// Interface: alpha = 4 LLRs, a = frozen indicators (a[1:0] for the left
// pair, a[3:2] for the right). Output v = {v'', v'}: the codewords of the
// two halves, not yet merged (the parent applies the size-4 combine), as in
// the pseudo-code of the decoder.
module bin_pre4 #(
  parameter int unsigned Q = mkpc_pkg::Q_DEF
) (
  input  logic [3:0][Q-1:0] alpha,
  input  logic [3:0]        a,
  output logic [3:0]        v
);
  logic [1:0][Q-1:0] al;
  logic [1:0]        ul, vl, vr;
  logic [3:0][1:0]   ur;
  logic [1:0]        sel;

  fb_stage #(.Q(Q), .M(2)) u_f (.alpha(alpha), .alpha_l(al));
  bin_dec2 #(.Q(Q)) u_dl (.alpha(al), .a(a[1:0]), .u(ul));
  cb_combine #(.M(1)) u_cl (.beta_l(ul[0]), .beta_r(ul[1]), .beta(vl));

  for (genvar k = 0; k < 4; k++) begin : g_pre
    // Candidate k assumes partial sums (v'[0], v'[1]) = (k[1], k[0]).
    localparam logic [1:0] K  = 2'(k);
    localparam logic [1:0] PS = {K[0], K[1]};
    logic [1:0][Q-1:0] ar;
    gb_stage #(.Q(Q), .M(2)) u_g (.alpha(alpha), .beta(PS), .alpha_r(ar));
    bin_dec2 #(.Q(Q)) u_d (.alpha(ar), .a(a[3:2]), .u(ur[k]));
  end

  assign sel = {vl[0], vl[1]};
  cb_combine #(.M(1)) u_cr (.beta_l(ur[sel][0]), .beta_r(ur[sel][1]), .beta(vr));

  assign v = {vr, vl};
endmodule
