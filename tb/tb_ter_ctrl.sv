// tb_ter_ctrl -- self-checking testbench for ter_ctrl.
//
// Exhaustive over all magnitude triples; checks m0 and m1 against the selection conditions.
// Expected values come from the behavioural model in mkpc_ref_pkg, not from
// the RTL. Ends with a TB_RESULT line; a watchdog stops a hung run.
module tb_ter_ctrl;
  import mkpc_ref_pkg::*;
  localparam int Q = 5;
  logic [2:0][Q-2:0] mg;
  logic m0, m1;
  int x0, x1, x2;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  ter_ctrl #(.Q(Q)) dut (.mag(mg), .m0(m0), .m1(m1));

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
    for (int t = 0; t < 4096; t++) begin
      x0 = t % 16; x1 = (t / 16) % 16; x2 = t / 256;
      mg = {(Q-1)'(x2), (Q-1)'(x1), (Q-1)'(x0)};

      @(posedge clk);
      chk(int'(m0), int'(x0 >= imin(x1, x2)), "m0");
      chk(int'(m1), int'(x1 >= x2), "m1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
