// mkpc_host -- frame source and sink for end-to-end tests of
// mk_polar_decoder.
//
// Offers NFRAMES frames with a random rate each (random number and
// positions of information bits), alternating noiseless, noisy and arbitrary
// LLRs. The first half of the run uses random gaps on in_valid and random
// back-pressure on out_ready; the second half streams one frame per clock
// with out_ready high. Every codeword is compared with the reference SC
// decoder (and, for noiseless frames, with the transmitted codeword).
// Timing checks: in the streaming half every offered frame is accepted at
// once, and each codeword leaves exactly LAT clocks after its frame entered.
// Counted events (outputs): frames whose rate differs from the previous one,
// frames loaded while earlier frames were still being decoded or offloaded,
// clocks with the input stalled by back-pressure, streamed frames.
module mkpc_host #(
  parameter int unsigned           DEPTH   = 5,
  parameter mkpc_pkg::kernel_seq_t TERN    = mkpc_pkg::kernel_seq_t'('b00001),
  parameter int                    NFRAMES = 40,
  parameter int                    LAT     = 4
) (
  input  logic                                           clk,
  input  logic                                           rst_n,
  output logic                                           in_valid,
  input  logic                                           in_ready,
  output logic [mkpc_ref_pkg::code_len(DEPTH, int'(TERN))-1:0][mkpc_pkg::Q_DEF-1:0] in_llr,
  output logic [mkpc_ref_pkg::code_len(DEPTH, int'(TERN))-1:0]                      in_frozen,
  input  logic                                           out_valid,
  output logic                                           out_ready,
  input  logic [mkpc_ref_pkg::code_len(DEPTH, int'(TERN))-1:0]                      out_x,
  output int                                             checks,
  output int                                             failures,
  output int                                             n_rate_change,
  output int                                             n_overlap,
  output int                                             n_stall,
  output int                                             n_stream,
  output logic                                           done
);
  import mkpc_ref_pkg::*;
  localparam int Q = mkpc_pkg::Q_DEF;
  localparam int N = code_len(DEPTH, int'(TERN));

  typedef struct {
    bvec_t exp;
    bvec_t cw;
    bit    noiseless;
    int    cyc;
  } rec_t;

  rec_t q[$];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 6) $display("N=%0d FAIL %s at %0t", N, what, $time);
    end
  endtask

  initial begin
    ivec_t llr;
    bvec_t fz, cw, e;
    int    k, prev_k, cyc, sent, got, gap, outstanding;
    bit    have, stream;
    rec_t  r;
    checks = 0; failures = 0; n_rate_change = 0; n_overlap = 0; n_stall = 0; n_stream = 0;
    done = 0; in_valid = 0; out_ready = 0; in_llr = '0; in_frozen = '0;
    cyc = 0; sent = 0; got = 0; gap = 0; have = 0; prev_k = -1; outstanding = 0; stream = 0;
    @(posedge rst_n);
    while (got < NFRAMES && cyc < 200 * NFRAMES + 100) begin
      @(negedge clk);
      cyc++;
      stream = (sent >= NFRAMES / 2);
      if (!have && sent < NFRAMES) begin
        gen_frame(DEPTH, int'(TERN), Q, sent % 3, llr, fz, cw, k);
        for (int i = 0; i < N; i++) begin in_llr[i] = Q'(llr[i]); in_frozen[i] = fz[i]; end
        e = sc(llr, fz, DEPTH, int'(TERN), Q);
        have = 1;
        gap = stream ? 0 : int'($urandom_range(2, 0));
      end
      in_valid  = have && (gap == 0);
      if (gap > 0) gap--;
      out_ready = stream ? 1'b1 : ($urandom_range(1, 0) != 0);
      #1;
      if (in_valid && !in_ready) n_stall++;
      if (stream && in_valid) chk(in_ready, "frame accepted at once while streaming");
      if (out_valid && out_ready) begin
        int bad;
        r = q.pop_front();
        bad = 0;
        for (int i = 0; i < N; i++) if (out_x[i] !== r.exp[i]) bad++;
        chk(bad == 0, $sformatf("codeword %0d vs reference (%0d bits)", got, bad));
        if (r.noiseless) begin
          bad = 0;
          for (int i = 0; i < N; i++) if (out_x[i] !== r.cw[i]) bad++;
          chk(bad == 0, "noiseless frame decoded");
        end
        if (r.cyc >= 0) chk(cyc - r.cyc == LAT, $sformatf("latency %0d", cyc - r.cyc));
        got++;
        outstanding--;
      end
      if (in_valid && in_ready) begin
        if (outstanding > 0) n_overlap++;
        if (prev_k >= 0 && k != prev_k) n_rate_change++;
        if (stream) n_stream++;
        prev_k = k;
        r.exp = e;
        r.cw = cw;
        r.noiseless = (sent % 3 == 0);
        r.cyc = stream ? cyc : -1;
        q.push_back(r);
        outstanding++;
        sent++;
        have = 0;
      end
    end
    chk(got == NFRAMES, "all frames returned");
    done = 1;
  end
endmodule
