// tb_mk_polar_decoder -- end-to-end testbench of the decoder with its
// frame registers.
//
// Three decoders run side by side, each fed by a mkpc_host:
//   the default code N=48 {3,2,2,2,2}, N=81 {3,3,3,3} (pure ternary, size-3
//   leaves) and N=6 {3,2} (size-2 leaves),
// so that all three building blocks and both glue types are exercised.
// Checked: every codeword against the reference SC model, one frame per
// clock and a four-clock port-to-port latency while streaming. Each
// mechanism (rate change between frames, loading during decode/offload,
// input stall under back-pressure, streaming) must occur at least once in
// every decoder or a failure is counted.
module tb_mk_polar_decoder;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NCFG = 3;
  int   c[NCFG], f[NCFG], rc[NCFG], ov[NCFG], st[NCFG], sm[NCFG];
  logic d[NCFG];

  // ---- default configuration
  logic                in_valid0, in_ready0, out_valid0, out_ready0;
  logic [47:0][4:0]    in_llr0;
  logic [47:0]         in_frozen0, out_x0;
  mk_polar_decoder dut0 (.clk, .rst_n, .in_valid(in_valid0), .in_ready(in_ready0),
    .in_llr(in_llr0), .in_frozen(in_frozen0), .out_valid(out_valid0),
    .out_ready(out_ready0), .out_x(out_x0));
  mkpc_host #(.DEPTH(5), .TERN(16'b00001), .NFRAMES(120)) host0 (.clk, .rst_n,
    .in_valid(in_valid0), .in_ready(in_ready0), .in_llr(in_llr0), .in_frozen(in_frozen0),
    .out_valid(out_valid0), .out_ready(out_ready0), .out_x(out_x0),
    .checks(c[0]), .failures(f[0]), .n_rate_change(rc[0]), .n_overlap(ov[0]),
    .n_stall(st[0]), .n_stream(sm[0]), .done(d[0]));

  // ---- N = 81, kernel order {3,3,3,3}
  logic                in_valid1, in_ready1, out_valid1, out_ready1;
  logic [80:0][4:0]    in_llr1;
  logic [80:0]         in_frozen1, out_x1;
  mk_polar_decoder #(.DEPTH(4), .TERN(16'b1111)) dut1 (.clk, .rst_n,
    .in_valid(in_valid1), .in_ready(in_ready1), .in_llr(in_llr1), .in_frozen(in_frozen1),
    .out_valid(out_valid1), .out_ready(out_ready1), .out_x(out_x1));
  mkpc_host #(.DEPTH(4), .TERN(16'b1111), .NFRAMES(80)) host1 (.clk, .rst_n,
    .in_valid(in_valid1), .in_ready(in_ready1), .in_llr(in_llr1), .in_frozen(in_frozen1),
    .out_valid(out_valid1), .out_ready(out_ready1), .out_x(out_x1),
    .checks(c[1]), .failures(f[1]), .n_rate_change(rc[1]), .n_overlap(ov[1]),
    .n_stall(st[1]), .n_stream(sm[1]), .done(d[1]));

  // ---- N = 6, kernel order {3,2}
  logic                in_valid2, in_ready2, out_valid2, out_ready2;
  logic [5:0][4:0]     in_llr2;
  logic [5:0]          in_frozen2, out_x2;
  mk_polar_decoder #(.DEPTH(2), .TERN(16'b01)) dut2 (.clk, .rst_n,
    .in_valid(in_valid2), .in_ready(in_ready2), .in_llr(in_llr2), .in_frozen(in_frozen2),
    .out_valid(out_valid2), .out_ready(out_ready2), .out_x(out_x2));
  mkpc_host #(.DEPTH(2), .TERN(16'b01), .NFRAMES(300)) host2 (.clk, .rst_n,
    .in_valid(in_valid2), .in_ready(in_ready2), .in_llr(in_llr2), .in_frozen(in_frozen2),
    .out_valid(out_valid2), .out_ready(out_ready2), .out_x(out_x2),
    .checks(c[2]), .failures(f[2]), .n_rate_change(rc[2]), .n_overlap(ov[2]),
    .n_stall(st[2]), .n_stream(sm[2]), .done(d[2]));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c.sum(), f.sum() + 1);
    $finish;
  end

  initial begin
    int checks, failures;
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (d[0] && d[1] && d[2]);
    checks = c.sum();
    failures = f.sum();
    for (int i = 0; i < NCFG; i++) begin
      $display("config %0d: rate changes %0d, loads during decode %0d, stalled clocks %0d, streamed frames %0d",
               i, rc[i], ov[i], st[i], sm[i]);
      checks += 4;
      if (rc[i] == 0) failures++;
      if (ov[i] == 0) failures++;
      if (st[i] == 0) failures++;
      if (sm[i] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
