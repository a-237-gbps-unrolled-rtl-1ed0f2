// polar_spc_stage: decoder for a single-parity-check constituent code of
// length N (only the first bit of the subcode frozen), with its pipeline
// register.
//
// Each bit is first decided on its own sign. If the decisions have odd
// parity, the bit whose LLR has the smallest magnitude (the lowest index on
// a tie) is flipped; this is the maximum-likelihood rule Fast-SSC uses. The
// paper names this decoder and limits it to lengths <= 4; the rule and the
// tie-break are the usual ones, not given in the paper.
//
// Timing: beta is registered, one clock after alpha.
module polar_spc_stage #(
  parameter int unsigned N = 4,
  parameter int unsigned Q = 5
) (
  input  logic                clk,
  input  logic [N-1:0][Q-1:0] alpha,
  output logic [N-1:0]        beta
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [N-1:0] hard;
  logic [N-1:0] flip;

  always_comb begin
    logic [Q:0] mag, best;
    logic [IW-1:0] idx;
    best = '1;
    idx  = 0;
    for (int i = 0; i < N; i++) begin
      hard[i] = alpha[i][Q-1];
      mag     = alpha[i][Q-1] ? -(Q + 1)'($signed(alpha[i])) : (Q + 1)'(alpha[i]);
      if (mag < best) begin
        best = mag;
        idx  = IW'(i);
      end
    end
    flip = '0;
    flip[idx] = ^hard;
  end

  always_ff @(posedge clk) beta <= hard ^ flip;

endmodule
