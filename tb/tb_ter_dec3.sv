// tb_ter_dec3 -- self-checking testbench for ter_dec3.
//
// Random LLRs (all sign/magnitude cases, ties included) and frozen masks; checks the 3 decided bits against the reference decision.
// Expected values come from the behavioural model in mkpc_ref_pkg, not from
// the RTL. Ends with a TB_RESULT line; a watchdog stops a hung run.
module tb_ter_dec3;
  import mkpc_ref_pkg::*;
  localparam int Q = 5;
  logic [2:0][Q-1:0] alpha;
  logic [2:0] a, u;
  ivec_t al;
  bvec_t fz, e;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  ter_dec3 #(.Q(Q)) dut (.alpha(alpha), .a(a), .u(u));

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
      al = new[3];
      fz = new[3];
      for (int i = 0; i < 3; i++) begin
        alpha[i] = Q'(rand_llr(Q));
        al[i] = int'(alpha[i]);
      end
      a = 3'($urandom);
      if (t % 2 == 0) a = '1;
      for (int i = 0; i < 3; i++) fz[i] = a[i];
      e = dec3(al, fz, Q);

      @(posedge clk);
      for (int i = 0; i < 3; i++) chk(int'(u[i]), int'(e[i]), "u");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
