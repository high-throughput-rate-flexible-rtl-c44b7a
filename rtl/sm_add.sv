// sm_add -- saturating adder of two sign-magnitude LLRs.
//
// Helper of the g-function blocks. Both Q-bit sign-magnitude operands are
// widened to (Q+1)-bit two's complement, added, and the result is turned
// back into sign-magnitude with the magnitude clipped at 2^(Q-1)-1. A zero
// sum is returned as +0. Purely combinational.
//
// The sum itself is the decoder's g arithmetic; saturating to the same Q bits
// (rather than growing the word) follows from the decoder using equal
// internal and channel widths. Writing zero as +0 is this design's choice.
module sm_add #(
  parameter int unsigned Q = mkpc_pkg::Q_DEF
) (
  input  logic [Q-1:0] a,
  input  logic [Q-1:0] b,
  output logic [Q-1:0] s
);
  localparam logic [Q:0] MAXMAG = (Q+1)'((1 << (Q-1)) - 1);

  logic signed [Q:0] va, vb, sum;
  logic [Q:0] mag;

  always_comb begin
    va  = a[Q-1] ? -$signed({2'b00, a[Q-2:0]}) : $signed({2'b00, a[Q-2:0]});
    vb  = b[Q-1] ? -$signed({2'b00, b[Q-2:0]}) : $signed({2'b00, b[Q-2:0]});
    sum = va + vb;
    mag = sum[Q] ? (Q+1)'(-sum) : (Q+1)'(sum);
    s   = {sum[Q], (mag > MAXMAG) ? MAXMAG[Q-2:0] : mag[Q-2:0]};
  end
endmodule
