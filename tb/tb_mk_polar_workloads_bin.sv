// tb_mk_polar_workloads_bin -- the pure-binary codes of the decoder's
// implementation results, N = 32, 64, 128, 256, 512 and 1024 (the last is
// also the size used in the comparison with other decoders), each in its
// own decoder instance, end to end. Each instance gets NF random-rate
// frames from a mkpc_host, checked against the reference SC model, with
// the streamed half checked for one frame per clock and 4-clock latency.
module tb_mk_polar_workloads_bin;
  import mkpc_ref_pkg::code_len;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NCFG = 6;
  localparam int NF   = 8;
  // {DEPTH, TERN} per code; bit i of TERN = kernel i is T3.
  localparam int DEP[NCFG] = '{5, 6, 7, 8, 9, 10};
  localparam int TER[NCFG] = '{0, 0, 0, 0, 0, 0};

  int   c[NCFG], f[NCFG], rc[NCFG], ov[NCFG], st[NCFG], sm[NCFG];
  logic d[NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int unsigned           DEPTH = DEP[g];
    localparam mkpc_pkg::kernel_seq_t TERN  = mkpc_pkg::kernel_seq_t'(TER[g]);
    localparam int                    N     = code_len(DEP[g], TER[g]);
    logic                in_valid, in_ready, out_valid, out_ready;
    logic [N-1:0][4:0]   in_llr;
    logic [N-1:0]        in_frozen, out_x;

    mk_polar_decoder #(.DEPTH(DEPTH), .TERN(TERN)) dut (.clk, .rst_n, .in_valid, .in_ready,
      .in_llr, .in_frozen, .out_valid, .out_ready, .out_x);
    mkpc_host #(.DEPTH(DEPTH), .TERN(TERN), .NFRAMES(NF)) host (.clk, .rst_n,
      .in_valid, .in_ready, .in_llr, .in_frozen, .out_valid, .out_ready, .out_x,
      .checks(c[g]), .failures(f[g]), .n_rate_change(rc[g]), .n_overlap(ov[g]),
      .n_stall(st[g]), .n_stream(sm[g]), .done(d[g]));
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c.sum(), f.sum() + 1);
    $finish;
  end

  initial begin
    int checks, failures;
    bit all;
    repeat (4) @(posedge clk);
    rst_n = 1;
    do begin
      @(posedge clk);
      all = 1;
      foreach (d[i]) all &= d[i];
    end while (!all);
    checks = c.sum();
    failures = f.sum();
    for (int i = 0; i < NCFG; i++) begin
      $display("N=%0d: checks %0d failures %0d", code_len(DEP[i], TER[i]), c[i], f[i]);
      checks++;
      if (sm[i] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
