// polar_comb_stage: the Comb operation of a split node of length N, with its
// pipeline register.
//
// It rebuilds the node's codeword estimate from its children's:
//   beta[i] = beta_l[i] ^ beta_r[i],  beta[i+N/2] = beta_r[i],  i < N/2,
// the polar encoding butterfly x = [v_l ^ v_r, v_r]. The operation and its
// register follow the paper; the index order matches polar_f_stage and
// polar_g_stage.
//
// Timing: beta is registered, one clock after beta_l and beta_r, which the
// parent presents aligned on the same frame.
module polar_comb_stage #(
  parameter int unsigned N = 8
) (
  input  logic           clk,
  input  logic [N/2-1:0] beta_l,
  input  logic [N/2-1:0] beta_r,
  output logic [N-1:0]   beta
);
  always_ff @(posedge clk) beta <= {beta_r, beta_l ^ beta_r};
endmodule
