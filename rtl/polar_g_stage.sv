// polar_g_stage: the G operation of a split node of length N, with its
// pipeline register.
//
// For i < N/2 the LLR passed to the right child is
//   alpha_r[i] = b + (beta_l[i] ? -a : a),  a = alpha[i], b = alpha[i+N/2],
// where beta_l is the left child's decision on the same frame (the register
// chains in front of this stage align the two). The sum is saturated to
// +-(2^(Q-1)-1). The operation and its register follow the paper; the word
// width, the saturation and the pairing of i with i+N/2 are this design's.
// When the left child is a Rate-0 code the parent ties beta_l to zero and the
// stage reduces to alpha_r = a + b.
//
// Timing: alpha_r is registered, one clock after alpha and beta_l.
module polar_g_stage #(
  parameter int unsigned N = 8,
  parameter int unsigned Q = 5
) (
  input  logic                   clk,
  input  logic [N-1:0][Q-1:0]    alpha,
  input  logic [N/2-1:0]         beta_l,
  output logic [N/2-1:0][Q-1:0]  alpha_r
);
  localparam int MAXV = polar_pkg::llr_max(Q);

  logic [N/2-1:0][Q-1:0] g_d;

  always_comb begin
    for (int i = 0; i < N / 2; i++) begin
      logic signed [Q+1:0] a, b, s;
      a = (Q + 2)'($signed(alpha[i]));
      b = (Q + 2)'($signed(alpha[i + N / 2]));
      s = beta_l[i] ? (b - a) : (b + a);
      if (s > (Q + 2)'(MAXV))       s = (Q + 2)'(MAXV);
      else if (s < -(Q + 2)'(MAXV)) s = -(Q + 2)'(MAXV);
      g_d[i] = Q'(s);
    end
  end

  always_ff @(posedge clk) alpha_r <= g_d;

endmodule
