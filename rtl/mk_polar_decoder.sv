// mk_polar_decoder -- rate-flexible combinational SC decoder for
// multi-kernel (T2/T3) polar codes, with its frame registers.
//
// Structure (one frame per clock):
//   in_llr    -> frame_regs (N*Q) --+
//   in_frozen -> frame_regs (N)   --+--> comb_decoder --> frame_regs (N) -> out_x
// The input and frozen-pattern register pairs hold the frame being decoded
// while the next frame, with its own frozen pattern, is loaded; the output
// pair captures the estimated codeword one clock after the frame entered the
// active input set and holds it for offloading while later frames decode.
// Because the frozen pattern travels with every frame, the code rate can
// change from one frame to the next.
//
// Interface: valid/ready on input (in_llr, in_frozen) and output (out_x).
// in_frozen[i] = 1 marks an information bit, 0 a frozen bit. LLRs are Q-bit
// sign-magnitude (sign = MSB, 1 = negative). out_x is the estimated
// codeword x = u*G. Timing: with out_ready high, a frame accepted at clock
// edge t appears on out_x after edge t+3 (four register stages, of which
// the decode itself is one clock); throughput is one frame per clock.
//
// Default code: N = 48 with kernel order {3,2,2,2,2} (TERN bit 0 = root
// kernel is T3), Q = 5. The register organisation and one-clock decode
// follow the decoder's description; the handshake is this design's choice.
module mk_polar_decoder #(
  parameter int unsigned           Q     = mkpc_pkg::Q_DEF,
  parameter int unsigned           DEPTH = 5,
  parameter mkpc_pkg::kernel_seq_t TERN  = mkpc_pkg::kernel_seq_t'('b00001),
  parameter int unsigned           N     = mkpc_pkg::code_len(DEPTH, TERN)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [N-1:0][Q-1:0] in_llr,
  input  logic [N-1:0]        in_frozen,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [N-1:0]        out_x
);
  logic                act_valid, act_valid_f, act_ready;
  logic                rdy_llr, rdy_frz;
  logic [N-1:0][Q-1:0] act_llr;
  logic [N-1:0]        act_frz, dec_x;

  frame_regs #(.W(N*Q)) u_llr_regs (
    .clk, .rst_n, .in_valid, .in_ready(rdy_llr), .in_data(in_llr),
    .out_valid(act_valid), .out_ready(act_ready), .out_data(act_llr));

  frame_regs #(.W(N)) u_frozen_regs (
    .clk, .rst_n, .in_valid, .in_ready(rdy_frz), .in_data(in_frozen),
    .out_valid(act_valid_f), .out_ready(act_ready), .out_data(act_frz));

  assign in_ready = rdy_llr & rdy_frz;

  comb_decoder #(.Q(Q), .DEPTH(DEPTH), .TERN(TERN), .N(N)) u_dec (
    .alpha(act_llr), .a(act_frz), .x(dec_x));

  frame_regs #(.W(N)) u_out_regs (
    .clk, .rst_n, .in_valid(act_valid), .in_ready(act_ready), .in_data(dec_x),
    .out_valid, .out_ready, .out_data(out_x));

  // The LLR and frozen-pattern register pairs move in lock step.
  a_lockstep : assert property (@(posedge clk) disable iff (!rst_n)
                                act_valid == act_valid_f && rdy_llr == rdy_frz);
endmodule
