// tb_polar_rate1_stage: random LLRs through polar_rate1_stage (N = 8). One
// clock later each bit must be 1 exactly when its LLR was negative.
module tb_polar_rate1_stage;
  localparam int N = 8, Q = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [N-1:0][Q-1:0] alpha;
  logic [N-1:0]        beta, expected;
  polar_rate1_stage #(.N(N), .Q(Q)) dut (.clk, .alpha, .beta);

  int checks = 0, failures = 0;

  initial begin
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (t > 0) begin
        checks++;
        if (beta !== expected) begin failures++; $display("t=%0d got %b expected %b", t, beta, expected); end
      end
      for (int i = 0; i < N; i++) begin
        alpha[i] = Q'(int'($urandom % 31) - 15);
        expected[i] = $signed(alpha[i]) < 0;
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
