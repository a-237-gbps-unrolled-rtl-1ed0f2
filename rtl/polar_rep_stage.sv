// polar_rep_stage: decoder for a repetition constituent code of length N
// (only the last bit of the subcode carries information), with its
// pipeline register.
//
// The maximum-likelihood decision adds the N LLRs and repeats the sign of
// the sum on every bit: beta[i] = (sum < 0). A zero sum decides 0. The sum is
// kept at full width, Q + clog2(N) bits, so it never saturates. The paper
// names this decoder and limits it to lengths <= 4; how it decides is the
// usual Fast-SSC rule, not spelled out in the paper.
//
// Timing: beta is registered, one clock after alpha.
module polar_rep_stage #(
  parameter int unsigned N = 4,
  parameter int unsigned Q = 5
) (
  input  logic                clk,
  input  logic [N-1:0][Q-1:0] alpha,
  output logic [N-1:0]        beta
);
  localparam int unsigned SW = Q + $clog2(N);

  logic signed [SW-1:0] sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < N; i++) sum += SW'($signed(alpha[i]));
  end

  always_ff @(posedge clk) beta <= {N{sum[SW-1]}};

endmodule
