// tb_frame_regs -- self-checking testbench for frame_regs.
//
// Phase 1: random in_valid and out_ready; every word must come out once, in
// order, unchanged, and must stay stable while out_valid is high and
// out_ready low. Phase 2: in_valid and out_ready held high; one word must
// pass per clock, each two clocks after it was accepted.
module tb_frame_regs;
  localparam int W = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         in_valid = 0, out_ready = 0, in_ready, out_valid;
  logic [W-1:0] in_data = '0, out_data;
  int checks = 0, failures = 0;

  frame_regs #(.W(W)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  logic [W-1:0] exp_q[$];
  int           acc_cyc[$];
  int           cyc = 0, sent = 0, got = 0, stream_start = 0, stream_got = 0;
  logic         held = 0;
  logic [W-1:0] held_data;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (got < 3000) begin
      @(negedge clk);
      cyc++;
      if (sent < 2000) begin
        in_valid  = ($urandom_range(3, 0) != 0);
        out_ready = ($urandom_range(3, 0) != 0);
      end else begin
        if (stream_start == 0) stream_start = cyc;
        in_valid  = (sent < 3000);
        out_ready = 1;
      end
      if (in_valid && !(held_in_stall())) in_data = W'($urandom);
      #1;
      if (held) chk(out_valid && out_data == held_data, "output held while stalled");
      if (in_valid && in_ready) begin
        exp_q.push_back(in_data);
        acc_cyc.push_back(cyc);
        sent++;
      end
      if (out_valid && out_ready) begin
        int c0;
        c0 = acc_cyc.pop_front();
        chk(out_data == exp_q.pop_front(), "data order/content");
        got++;
        if (sent > 2000 && c0 > stream_start) begin
          chk(cyc - c0 == 2, "latency of two clocks when streaming");
          stream_got++;
        end
      end
      if (sent >= 2000 && sent < 3000 && stream_start != 0 && cyc > stream_start + 2)
        chk(in_ready, "one word per clock when streaming");
      held = out_valid && !out_ready;
      held_data = out_data;
    end
    chk(stream_got > 900, $sformatf("streaming phase reached (%0d)", stream_got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // in_data may only change when the previous offer was taken
  logic last_stall = 0;
  always @(posedge clk) last_stall <= in_valid && !in_ready;
  function automatic bit held_in_stall();
    return last_stall;
  endfunction
endmodule
