// tb_polar_f_stage: random LLR vectors through polar_f_stage (N = 16, Q = 5),
// including the most negative code -16, whose magnitude must saturate to 15.
// Each output is compared, one clock after its input, with
// sign(a)sign(b)min(|a|,|b|) worked out here in integers.
module tb_polar_f_stage;
  localparam int N = 16, Q = 5, MAXV = 15;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [N-1:0][Q-1:0]   alpha;
  logic [N/2-1:0][Q-1:0] alpha_l;
  polar_f_stage #(.N(N), .Q(Q)) dut (.clk, .alpha, .alpha_l);

  int checks = 0, failures = 0;
  int exp_q [N/2];

  initial begin
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (t > 0) for (int i = 0; i < N / 2; i++) begin
        checks++;
        if ($signed(alpha_l[i]) != exp_q[i]) begin
          failures++;
          $display("t=%0d i=%0d got %0d expected %0d", t, i, $signed(alpha_l[i]), exp_q[i]);
        end
      end
      for (int i = 0; i < N; i++) alpha[i] = Q'($urandom);
      for (int i = 0; i < N / 2; i++) begin
        automatic int a = $signed(alpha[i]);
        automatic int b = $signed(alpha[i + N / 2]);
        automatic int ma = a < 0 ? -a : a;
        automatic int mb = b < 0 ? -b : b;
        automatic int m = ma < mb ? ma : mb;
        if (m > MAXV) m = MAXV;
        exp_q[i] = ((a < 0) != (b < 0)) ? -m : m;
      end
    end
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
