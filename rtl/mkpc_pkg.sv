// mkpc_pkg -- constants and helpers shared by the multi-kernel polar decoder.
//
// A code of length N = 2^n * 3^m is described by its kernel sequence
// G = T(k0) x T(k1) x ... x T(k(DEPTH-1)) (x = Kronecker product). In the RTL
// the sequence is the pair (DEPTH, TERN): DEPTH kernels, and bit i of TERN set
// when kernel i is the ternary kernel T3 (clear for the binary kernel T2).
// Kernel 0 is the outermost one, i.e. the root stage of the decoder tree.
// Example: kernel order {3,2,2,2,2} (N = 48) is DEPTH = 5, TERN = 'b00001.
//
// LLRs are Q-bit sign-magnitude words: bit Q-1 is the sign (1 = negative,
// i.e. bit 1 more likely), bits Q-2:0 the magnitude. Q = 5 is the
// quantization Q(5,5) chosen for the decoder: channel and internal LLRs use
// the same 5 bits, so additions saturate at +-(2^(Q-1)-1).
package mkpc_pkg;

  // Default LLR width (channel and internal).
  parameter int unsigned Q_DEF = 5;

  // Longest kernel sequence the parameters can express. The largest code
  // the decoder family targets, N = 4096 = 2^12, has 12 kernels.
  parameter int unsigned KMAX = 16;

  typedef logic [KMAX-1:0] kernel_seq_t;

  // Block length of a kernel sequence: product of the kernel sizes.
  function automatic int unsigned code_len(int unsigned depth, kernel_seq_t tern);
    int unsigned n = 1;
    for (int unsigned i = 0; i < depth; i++) n = n * (tern[i] ? 3 : 2);
    return n;
  endfunction

endpackage
