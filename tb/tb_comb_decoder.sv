// tb_comb_decoder -- self-checking testbench for comb_decoder.
//
// Runs five kernel sequences side by side so that every building block and
// both kinds of glue logic are used:
//   N=48 {3,2,2,2,2} (default: ternary root, size-4 leaves),
//   N=6  {3,2}       (size-2 leaves under a ternary stage),
//   N=81 {3,3,3,3}   (pure ternary, size-3 leaves),
//   N=12 {2,2,3}     (binary glue over size-3 leaves),
//   N=32 {2,2,2,2,2} (pure binary).
// Each harness compares with the reference SC model frame by frame.
module tb_comb_decoder;
  logic clk = 0;
  always #5 clk = ~clk;

  int c[5], f[5];
  logic d[5];
  int checks, failures;

  tb_comb_cfg #(.DEPTH(5), .TERN(16'b00001), .ITERS(300)) u48 (.clk, .checks(c[0]), .failures(f[0]), .done(d[0]));
  tb_comb_cfg #(.DEPTH(2), .TERN(16'b01),    .ITERS(600)) u6  (.clk, .checks(c[1]), .failures(f[1]), .done(d[1]));
  tb_comb_cfg #(.DEPTH(4), .TERN(16'b1111),  .ITERS(300)) u81 (.clk, .checks(c[2]), .failures(f[2]), .done(d[2]));
  tb_comb_cfg #(.DEPTH(3), .TERN(16'b100),   .ITERS(600)) u12 (.clk, .checks(c[3]), .failures(f[3]), .done(d[3]));
  tb_comb_cfg #(.DEPTH(5), .TERN(16'b00000), .ITERS(300)) u32 (.clk, .checks(c[4]), .failures(f[4]), .done(d[4]));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c.sum(), f.sum() + 1);
    $finish;
  end

  initial begin
    @(posedge clk);
    wait (d[0] && d[1] && d[2] && d[3] && d[4]);
    checks = c.sum();
    failures = f.sum();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
