// tb_ct_combine -- self-checking testbench for ct_combine.
//
// Random child codewords; checks the three thirds of the combined word.
// Expected values come from the behavioural model in mkpc_ref_pkg, not from
// the RTL. Ends with a TB_RESULT line; a watchdog stops a hung run.
module tb_ct_combine;
  import mkpc_ref_pkg::*;
  localparam int Q = 5;
  localparam int M = 4;
  logic [M-1:0] bl, bc, br;
  logic [3*M-1:0] b;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  ct_combine #(.M(M)) dut (.beta_l(bl), .beta_c(bc), .beta_r(br), .beta(b));

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
      bl = M'($urandom);
      bc = M'($urandom);
      br = M'($urandom);

      @(posedge clk);
      for (int i = 0; i < M; i++) begin
        chk(int'(b[i]), int'(bl[i] ^ bc[i]), "0");
        chk(int'(b[i+M]), int'(bl[i] ^ br[i]), "1");
        chk(int'(b[i+2*M]), int'(bl[i] ^ bc[i] ^ br[i]), "2");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
