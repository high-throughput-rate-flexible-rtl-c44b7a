// tb_gb_stage -- self-checking testbench for gb_stage.
//
// Random LLR pairs and partial sums; checks the saturated sum of every element.
// Expected values come from the behavioural model in mkpc_ref_pkg, not from
// the RTL. Ends with a TB_RESULT line; a watchdog stops a hung run.
module tb_gb_stage;
  import mkpc_ref_pkg::*;
  localparam int Q = 5;
  localparam int M = 3;
  logic [2*M-1:0][Q-1:0] alpha;
  logic [M-1:0] beta;
  logic [M-1:0][Q-1:0] alpha_r;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  gb_stage #(.Q(Q), .M(M)) dut (.alpha(alpha), .beta(beta), .alpha_r(alpha_r));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin : stim
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < 2*M; i++) alpha[i] = Q'(rand_llr(Q));
      beta = M'($urandom);

      @(posedge clk);
      for (int i = 0; i < M; i++) chk(int'(alpha_r[i]), g2(int'(alpha[i]), int'(alpha[i+M]), int'(beta[i]), Q), "g");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
