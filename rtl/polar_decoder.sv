// polar_decoder: fully unrolled, deeply pipelined Fast-SSC decoder for one
// fixed polar code (default: the (1024,512) code of polar_pkg).
//
// Every clock it takes the N channel LLRs of a new frame (alpha_c, one Q-bit
// two's-complement LLR per code bit, positive meaning 0 more likely) and,
// LATENCY clocks later, delivers that frame's N-bit codeword estimate
// (beta_c). Frames overlap in the pipeline, one per stage, so throughput is N
// bits per clock whatever the latency. As in the paper the channel LLRs are
// registered first (its register alpha_c) and the decoder tree of
// polar_node follows; the output is the register of the root's last stage.
//
// A valid bit travels with each frame in a reset shift register; it is not in
// the paper, which shows the datapath only. The parameter K is used only to
// check the mask at elaboration. With a systematic polar code the K
// information bits are read directly from beta_c at the free positions.
//
// Timing: out_valid/beta_c follow in_valid/alpha_c by LATENCY = 1 +
// latency of the root node (560 clocks for the default code: 559 for the
// tree, as in the paper, plus the input register).
module polar_decoder #(
  parameter int unsigned N             = 1024,
  parameter int unsigned K             = 512,
  parameter int unsigned Q             = 5,
  parameter logic [N-1:0] FROZEN       = polar_pkg::FROZEN_1024_512,
  parameter int unsigned REP_MAX       = 4,
  parameter int unsigned SPC_MAX       = 4,
  parameter int unsigned RAM_MIN_DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [N-1:0][Q-1:0] alpha_c,
  output logic                out_valid,
  output logic [N-1:0]        beta_c
);
  localparam int unsigned TREE_LAT =
    polar_pkg::node_latency(polar_pkg::NMAX'(FROZEN), N, REP_MAX, SPC_MAX);
  localparam int unsigned LATENCY = 1 + TREE_LAT;

  if ($countones(FROZEN) != N - K) begin : g_bad_mask
    $error("polar_decoder: FROZEN has %0d frozen bits, expected N-K = %0d",
           $countones(FROZEN), N - K);
  end

  logic [N-1:0][Q-1:0] alpha_q;
  logic [LATENCY-1:0]  valid_pipe;

  always_ff @(posedge clk) alpha_q <= alpha_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_pipe <= '0;
    else        valid_pipe <= {valid_pipe[LATENCY-2:0], in_valid};
  end

  assign out_valid = valid_pipe[LATENCY-1];

  polar_node #(
    .N(N), .Q(Q), .FROZEN(FROZEN), .REP_MAX(REP_MAX), .SPC_MAX(SPC_MAX),
    .RAM_MIN_DEPTH(RAM_MIN_DEPTH)
  ) u_root (.clk, .rst_n, .alpha(alpha_q), .beta(beta_c));

endmodule
