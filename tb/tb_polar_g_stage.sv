// tb_polar_g_stage: random LLR vectors and left decisions through
// polar_g_stage (N = 16, Q = 5). Each output is compared, one clock after its
// input, with b + (1 - 2 beta) a saturated to +-15, worked out here in
// integers; large random operands make the saturation happen often.
module tb_polar_g_stage;
  localparam int N = 16, Q = 5, MAXV = 15;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [N-1:0][Q-1:0]   alpha;
  logic [N/2-1:0]        beta_l;
  logic [N/2-1:0][Q-1:0] alpha_r;
  polar_g_stage #(.N(N), .Q(Q)) dut (.clk, .alpha, .beta_l, .alpha_r);

  int checks = 0, failures = 0, saturated = 0;
  int exp_q [N/2];

  initial begin
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (t > 0) for (int i = 0; i < N / 2; i++) begin
        checks++;
        if ($signed(alpha_r[i]) != exp_q[i]) begin
          failures++;
          $display("t=%0d i=%0d got %0d expected %0d", t, i, $signed(alpha_r[i]), exp_q[i]);
        end
      end
      for (int i = 0; i < N; i++) alpha[i] = Q'(int'($urandom % 31) - 15);
      beta_l = (N / 2)'($urandom);
      for (int i = 0; i < N / 2; i++) begin
        automatic int a = $signed(alpha[i]);
        automatic int b = $signed(alpha[i + N / 2]);
        automatic int s = beta_l[i] ? b - a : b + a;
        if (s > MAXV || s < -MAXV) saturated++;
        exp_q[i] = s > MAXV ? MAXV : (s < -MAXV ? -MAXV : s);
      end
    end
    if (saturated == 0) failures++;
    $display("saturated=%0d", saturated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
