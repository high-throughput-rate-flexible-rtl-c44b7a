// tb_cb_combine -- self-checking testbench for cb_combine.
//
// Random child codewords; checks both halves of the combined word.
// Expected values come from the behavioural model in mkpc_ref_pkg, not from
// the RTL. Ends with a TB_RESULT line; a watchdog stops a hung run.
module tb_cb_combine;
  import mkpc_ref_pkg::*;
  localparam int Q = 5;
  localparam int M = 5;
  logic [M-1:0] bl, br;
  logic [2*M-1:0] b;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  cb_combine #(.M(M)) dut (.beta_l(bl), .beta_r(br), .beta(b));

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
      br = M'($urandom);

      @(posedge clk);
      for (int i = 0; i < M; i++) begin
        chk(int'(b[i]), int'(bl[i] ^ br[i]), "low");
        chk(int'(b[i+M]), int'(br[i]), "high");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
