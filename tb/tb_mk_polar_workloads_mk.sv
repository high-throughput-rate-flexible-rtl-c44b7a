// tb_mk_polar_workloads_mk -- the mixed and pure-ternary codes of the
// decoder's implementation results, plus the N = 72 code used to compare
// error-correction performance, each in its own decoder instance, end to end:
//   48 {3,2,2,2,2}, 72 {3,2,2,2,3}, 81 {3,3,3,3},
//                 192 {3,2,2,2,2,2,2}, 243 {3,3,3,3,3}, 324 {2,2,3,3,3,3},
//                 384 {3,2,2,2,2,2,2,2}, 576 {2,2,2,2,2,2,3,3},
//                 729 {3,3,3,3,3,3}, 768 {2,2,3,2,2,2,2,2,2}
// Kernel 0 (the root) is written first. Each instance gets NF random-rate
// frames from a mkpc_host, checked against the reference SC model, with
// the streamed half checked for one frame per clock and 4-clock latency.
module tb_mk_polar_workloads_mk;
  import mkpc_ref_pkg::code_len;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NCFG = 10;
  localparam int NF   = 8;
  // {DEPTH, TERN} per code; bit i of TERN = kernel i is T3.
  localparam int DEP[NCFG] = '{5, 5, 4, 7, 5, 6, 8, 8, 6, 9};
  localparam int TER[NCFG] = '{'b00001, 'b10001, 'b1111, 'b0000001, 'b11111,
                               'b111100, 'b00000001, 'b11000000, 'b111111,
                               'b000000100};

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
