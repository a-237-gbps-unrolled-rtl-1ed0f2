// polar_f_stage: the F operation of a split node of length N, with its
// pipeline register.
//
// For i < N/2 the LLR passed to the left child is
//   alpha_l[i] = sign(a) * sign(b) * min(|a|, |b|),  a = alpha[i], b = alpha[i+N/2],
// the min-sum form of the check-node update used by Fast-SSC. The operation
// and the register after it follow the paper (every functional unit is
// followed by a pipeline register); the min-sum form, the pairing of i with
// i+N/2 and the saturation of the result to the symmetric range
// +-(2^(Q-1)-1) are this design's choices.
//
// Timing: alpha_l is registered, one clock after alpha. No reset: the
// datapath carries whatever frame is in flight.
module polar_f_stage #(
  parameter int unsigned N = 8,  // length of the node; N/2 LLRs come out
  parameter int unsigned Q = 5   // LLR width in bits, two's complement
) (
  input  logic                   clk,
  input  logic [N-1:0][Q-1:0]    alpha,
  output logic [N/2-1:0][Q-1:0]  alpha_l
);
  localparam int MAXV = polar_pkg::llr_max(Q);

  logic [N/2-1:0][Q-1:0] f_d;

  always_comb begin
    for (int i = 0; i < N / 2; i++) begin
      logic signed [Q:0] a, b, mag_a, mag_b, mag;
      a     = (Q + 1)'($signed(alpha[i]));
      b     = (Q + 1)'($signed(alpha[i + N / 2]));
      mag_a = a[Q] ? -a : a;
      mag_b = b[Q] ? -b : b;
      mag   = (mag_a < mag_b) ? mag_a : mag_b;
      if (mag > (Q + 1)'(MAXV)) mag = (Q + 1)'(MAXV);
      f_d[i] = Q'((a[Q] ^ b[Q]) ? -mag : mag);
    end
  end

  always_ff @(posedge clk) alpha_l <= f_d;

endmodule
