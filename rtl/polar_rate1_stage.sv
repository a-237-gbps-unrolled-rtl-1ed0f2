// polar_rate1_stage: decoder for a Rate-1 constituent code of length N
// (no frozen bits), with its pipeline register.
//
// Every codeword is valid, so the decision is the hard decision on each LLR:
// beta[i] = (alpha[i] < 0). The paper lets Rate-1 (and Rate-0) nodes be as
// long as the code (1024); the hard-decision rule is the Fast-SSC one.
//
// Timing: beta is registered, one clock after alpha.
module polar_rate1_stage #(
  parameter int unsigned N = 4,
  parameter int unsigned Q = 5
) (
  input  logic                clk,
  input  logic [N-1:0][Q-1:0] alpha,
  output logic [N-1:0]        beta
);
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) beta[i] <= alpha[i][Q-1];
  end
endmodule
