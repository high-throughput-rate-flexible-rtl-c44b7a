// tb_comb_cfg -- checker harness for one comb_decoder configuration.
//
// Drives ITERS random frames (noiseless, noisy and arbitrary LLRs, random
// frozen sets) into a comb_decoder of kernel sequence (DEPTH, TERN), one per
// clock, and compares its codeword with the reference SC decoder of
// mkpc_ref_pkg; for noiseless frames also with the transmitted codeword.
// Reports its counts through the ports and raises done at the end.
module tb_comb_cfg #(
  parameter int unsigned           DEPTH = 2,
  parameter mkpc_pkg::kernel_seq_t TERN  = '0,
  parameter int                    ITERS = 100
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic done
);
  import mkpc_ref_pkg::*;
  localparam int Q = 5;
  localparam int N = code_len(DEPTH, int'(TERN));

  logic [N-1:0][Q-1:0] alpha;
  logic [N-1:0]        a, x;

  comb_decoder #(.Q(Q), .DEPTH(DEPTH), .TERN(TERN)) dut (.alpha(alpha), .a(a), .x(x));

  initial begin
    ivec_t llr;
    bvec_t fz, cw, e;
    int    k, bad;
    checks = 0; failures = 0; done = 0;
    for (int t = 0; t < ITERS; t++) begin
      gen_frame(DEPTH, int'(TERN), Q, t % 3, llr, fz, cw, k);
      for (int i = 0; i < N; i++) begin alpha[i] = Q'(llr[i]); a[i] = fz[i]; end
      e = sc(llr, fz, DEPTH, int'(TERN), Q);
      @(posedge clk);
      bad = 0;
      for (int i = 0; i < N; i++) if (x[i] !== e[i]) bad++;
      checks++;
      if (bad != 0) begin
        failures++;
        if (failures < 5) $display("N=%0d frame %0d: %0d bits differ from reference", N, t, bad);
      end
      if (t % 3 == 0) begin
        bad = 0;
        for (int i = 0; i < N; i++) if (x[i] !== cw[i]) bad++;
        checks++;
        if (bad != 0) begin
          failures++;
          if (failures < 5) $display("N=%0d frame %0d: noiseless frame not decoded", N, t);
        end
      end
    end
    done = 1;
  end
endmodule
