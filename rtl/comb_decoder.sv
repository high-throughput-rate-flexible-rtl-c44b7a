// comb_decoder -- combinational SC decoder for a multi-kernel polar code
// (no registers inside).
//
// The decoder tree of the kernel sequence (DEPTH, TERN) is laid out level by
// level: level 0 is the root (kernel 0, the whole code), level l holds
// N / NL(l) nodes of NL(l) LLRs each, and node p of level l has children
// p*k .. p*k+k-1 on level l+1 (k = 2 or 3, the size of kernel l). Each node
// scope computes its own input LLRs from its parent's LLRs and from the
// codewords its elder siblings have already decided:
//   * binary parent (T2):  child 0 gets f^b(parent), child 1 g^b(parent, c0)
//   * ternary parent (T3): child 0 gets f^t(parent), child 1 g1^t(parent, c0),
//                          child 2 g2^t(parent, c0, c1)
// and returns its codeword: the combine C^b(c0, c1) or C^t(c0, c1, c2) of
// its children's codewords, or, at the bottom level, the output of a
// building block: the size-4 pre-computation block when the last two
// kernels are T2, the size-3 ternary decision logic when the last kernel is
// T3, otherwise the size-2 binary decision logic. This is the recursive
// construction (decoder of size N = glue logic + decoders of size N/2 or
// N/3) written out as a flat tree, so that no module instantiates itself.
// Frozen indicators are only used by the building blocks; bottom node p
// takes a[p*NL +: NL].
//
// Interface: alpha = N channel LLRs (Q-bit sign-magnitude, alpha[i] for
// code position i), a = frozen indicators (1 = information bit, 0 =
// frozen), x = estimated codeword. The whole decode settles within one
// (long) clock period of the surrounding registers.
//
// The glue functions, building blocks and the rule that picks the building
// block from the tail of the kernel sequence follow the decoder's
// construction; kernel 0 is the root stage. Encoding the sequence as a bit
// mask and the flat, level-by-level layout are this design's choices.
module comb_decoder #(
  parameter int unsigned           Q     = mkpc_pkg::Q_DEF,
  parameter int unsigned           DEPTH = 5,
  parameter mkpc_pkg::kernel_seq_t TERN  = mkpc_pkg::kernel_seq_t'('b00001),
  parameter int unsigned           N     = mkpc_pkg::code_len(DEPTH, TERN)
) (
  input  logic [N-1:0][Q-1:0] alpha,
  input  logic [N-1:0]        a,
  output logic [N-1:0]        x
);
  import mkpc_pkg::*;

  // Bottom level of the tree: the size-4 block covers the last two kernels
  // when both are binary.
  localparam bit LAST2_BIN = (DEPTH >= 2) && !TERN[DEPTH-1] && !TERN[DEPTH-2];
  localparam int unsigned LEAF_L = LAST2_BIN ? DEPTH - 2 : DEPTH - 1;

  if (N != code_len(DEPTH, TERN) || DEPTH == 0 || DEPTH > KMAX) begin : g_bad
    $error("comb_decoder: N does not match the kernel sequence");
  end

  for (genvar l = 0; l <= LEAF_L; l++) begin : g_lvl
    localparam int unsigned NL    = code_len(DEPTH - l, TERN >> l);  // node size
    localparam int unsigned NODES = N / NL;
    localparam int unsigned K     = TERN[l] ? 3 : 2;                 // kernel of this level
    localparam int unsigned KP    = (l > 0 && TERN[l-1]) ? 3 : 2;    // kernel of parent level
    localparam int unsigned M     = NL / K;                          // child size

    for (genvar p = 0; p < NODES; p++) begin : g_node
      localparam int unsigned C = p % KP;   // position among siblings
      logic [NL-1:0][Q-1:0] llr;
      logic [NL-1:0]        cw;

      // ---- input LLRs of this node
      if (l == 0) begin : g_root
        assign llr = alpha;
      end else if (KP == 2 && C == 0) begin : g_f
        fb_stage #(.Q(Q), .M(NL)) u_f (.alpha(g_lvl[l-1].g_node[p/KP].llr), .alpha_l(llr));
      end else if (KP == 2) begin : g_g
        gb_stage #(.Q(Q), .M(NL)) u_g (.alpha(g_lvl[l-1].g_node[p/KP].llr),
                                       .beta(g_lvl[l].g_node[p-1].cw), .alpha_r(llr));
      end else if (C == 0) begin : g_ft
        ft_stage #(.Q(Q), .M(NL)) u_f (.alpha(g_lvl[l-1].g_node[p/KP].llr), .alpha_l(llr));
      end else if (C == 1) begin : g_g1
        g1t_stage #(.Q(Q), .M(NL)) u_g1 (.alpha(g_lvl[l-1].g_node[p/KP].llr),
                                         .beta_l(g_lvl[l].g_node[p-1].cw), .alpha_c(llr));
      end else begin : g_g2
        g2t_stage #(.Q(Q), .M(NL)) u_g2 (.alpha(g_lvl[l-1].g_node[p/KP].llr),
                                         .beta_l(g_lvl[l].g_node[p-2].cw),
                                         .beta_c(g_lvl[l].g_node[p-1].cw), .alpha_r(llr));
      end

      // ---- codeword of this node
      if (l == LEAF_L && NL == 4) begin : g_blk4
        logic [3:0] v;
        bin_pre4 #(.Q(Q)) u_dec (.alpha(llr), .a(a[p*NL +: NL]), .v(v));
        cb_combine #(.M(2)) u_c (.beta_l(v[1:0]), .beta_r(v[3:2]), .beta(cw));
      end else if (l == LEAF_L && K == 3) begin : g_blk3
        logic [2:0] u;
        ter_dec3 #(.Q(Q)) u_dec (.alpha(llr), .a(a[p*NL +: NL]), .u(u));
        ct_combine #(.M(1)) u_c (.beta_l(u[0]), .beta_c(u[1]), .beta_r(u[2]), .beta(cw));
      end else if (l == LEAF_L) begin : g_blk2
        logic [1:0] u;
        bin_dec2 #(.Q(Q)) u_dec (.alpha(llr), .a(a[p*NL +: NL]), .u(u));
        cb_combine #(.M(1)) u_c (.beta_l(u[0]), .beta_r(u[1]), .beta(cw));
      end else if (K == 2) begin : g_cb
        cb_combine #(.M(M)) u_c (.beta_l(g_lvl[l+1].g_node[2*p].cw),
                                 .beta_r(g_lvl[l+1].g_node[2*p+1].cw), .beta(cw));
      end else begin : g_ct
        ct_combine #(.M(M)) u_c (.beta_l(g_lvl[l+1].g_node[3*p].cw),
                                 .beta_c(g_lvl[l+1].g_node[3*p+1].cw),
                                 .beta_r(g_lvl[l+1].g_node[3*p+2].cw), .beta(cw));
      end
    end
  end

  assign x = g_lvl[0].g_node[0].cw;
endmodule
