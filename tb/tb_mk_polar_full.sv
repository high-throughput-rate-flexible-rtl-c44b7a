// tb_mk_polar_full -- the decoder at its default parameters (N = 48,
// kernel order {3,2,2,2,2}, Q = 5), end to end.
//
// One mkpc_host drives 600 random-rate frames through the unmodified top:
// half with random gaps and back-pressure, half streamed at one frame per
// clock. Every codeword is checked against the reference SC model, and the
// streamed frames against the four-clock latency.
module tb_mk_polar_full;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             in_valid, in_ready, out_valid, out_ready;
  logic [47:0][4:0] in_llr;
  logic [47:0]      in_frozen, out_x;
  int               checks, failures, rc, ov, st, sm;
  logic             done;

  mk_polar_decoder dut (.clk, .rst_n, .in_valid, .in_ready, .in_llr, .in_frozen,
                        .out_valid, .out_ready, .out_x);

  mkpc_host #(.DEPTH(5), .TERN(16'b00001), .NFRAMES(600)) host (.clk, .rst_n,
    .in_valid, .in_ready, .in_llr, .in_frozen, .out_valid, .out_ready, .out_x,
    .checks, .failures, .n_rate_change(rc), .n_overlap(ov), .n_stall(st),
    .n_stream(sm), .done);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    wait (done);
    $display("rate changes %0d, loads during decode %0d, stalled clocks %0d, streamed frames %0d",
             rc, ov, st, sm);
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + ((sm == 300) ? 0 : 1));
    $finish;
  end
endmodule
