// frame_regs -- double register set for one frame-wide word.
//
// Two W-bit registers in series: the first (load set) takes the next frame
// from its producer, the second (active set) holds the frame its consumer is
// working on. While the active set is in use, the load set can already be
// filled, so a new frame can be offered every clock and no cycle is lost
// between frames. Flow control is valid/ready on both sides: a word moves
// on a clock edge where valid and ready are both high. in_ready is high
// when the load set is empty or is moving into the active set this cycle;
// this path is combinational from out_ready. Latency from in to out: two
// clocks. Reset (synchronous, active low) empties both sets; the data
// registers themselves are not reset.
//
// The decoder uses one instance for the channel LLRs, one for the frozen
// pattern and one for the estimated codeword. The second register set
// itself follows the decoder's memory organisation; the handshake and the
// parallel, whole-frame load are this design's choice.
module frame_regs #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  logic         v_load, v_act;
  logic [W-1:0] d_load, d_act;
  logic         adv_act, adv_load;

  assign adv_act  = !v_act || out_ready;
  assign adv_load = !v_load || adv_act;
  assign in_ready = adv_load;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_load <= 1'b0;
      v_act  <= 1'b0;
    end else begin
      if (adv_act)  v_act  <= v_load;
      if (adv_load) v_load <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (adv_act && v_load)    d_act  <= d_load;
    if (adv_load && in_valid) d_load <= in_data;
  end

  assign out_valid = v_act;
  assign out_data  = d_act;

  // A frame offered downstream stays put until it is taken.
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
                            out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
