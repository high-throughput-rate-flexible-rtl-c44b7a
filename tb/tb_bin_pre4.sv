// tb_bin_pre4 -- self-checking testbench for bin_pre4.
//
// Random LLRs and frozen masks; checks both size-2 codewords against a reference SC decode of the size-4 code.
// Expected values come from the behavioural model in mkpc_ref_pkg, not from
// the RTL. Ends with a TB_RESULT line; a watchdog stops a hung run.
module tb_bin_pre4;
  import mkpc_ref_pkg::*;
  localparam int Q = 5;
  logic [3:0][Q-1:0] alpha;
  logic [3:0] a, u;
  ivec_t al;
  bvec_t fz, e;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  bin_pre4 #(.Q(Q)) dut (.alpha(alpha), .a(a), .v(u));

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
      al = new[4];
      fz = new[4];
      for (int i = 0; i < 4; i++) begin
        alpha[i] = Q'(rand_llr(Q));
        al[i] = int'(alpha[i]);
      end
      a = 4'($urandom);
      if (t % 2 == 0) a = '1;
      for (int i = 0; i < 4; i++) fz[i] = a[i];
      e = sc(al, fz, 2, 0, Q);
      // undo the size-4 combine: v' = e[0]^e[2], e[1]^e[3]; v'' = e[2], e[3]
      e = '{e[0]^e[2], e[1]^e[3], e[2], e[3]};

      @(posedge clk);
      for (int i = 0; i < 4; i++) chk(int'(u[i]), int'(e[i]), "u");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
