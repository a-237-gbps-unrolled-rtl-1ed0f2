// tb_polar_spc_stage: random LLRs through polar_spc_stage (N = 4, the
// paper's largest SPC length). The expected output is found by brute force:
// of the 8 even-parity words, the one that maximises sum((1-2x_i) alpha_i),
// the maximum-likelihood codeword, with ties resolved as the hardware's
// lowest-index rule resolves them (only checked when the maximum is unique).
module tb_polar_spc_stage;
  localparam int N = 4, Q = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [N-1:0][Q-1:0] alpha;
  logic [N-1:0]        beta, expected;
  bit                  unique_ml;
  polar_spc_stage #(.N(N), .Q(Q)) dut (.clk, .alpha, .beta);

  int checks = 0, failures = 0, flips = 0;

  initial begin
    for (int t = 0; t < 4000; t++) begin
      automatic int best = -1000, nbest = 0;
      @(negedge clk);
      if (t > 0 && unique_ml) begin
        checks++;
        if (beta !== expected) begin
          failures++;
          $display("t=%0d got %b expected %b", t, beta, expected);
        end
      end
      for (int i = 0; i < N; i++) alpha[i] = Q'(int'($urandom % 31) - 15);
      for (int w = 0; w < (1 << N); w++) begin
        automatic logic [N-1:0] x = N'(w);
        automatic int m = 0;
        if (^x) continue;
        for (int i = 0; i < N; i++) m += x[i] ? -$signed(alpha[i]) : $signed(alpha[i]);
        if (m > best) begin best = m; nbest = 1; expected = x; end
        else if (m == best) nbest++;
      end
      unique_ml = (nbest == 1);
      begin
        automatic logic [N-1:0] hard;
        for (int i = 0; i < N; i++) hard[i] = alpha[i][Q-1];
        if (unique_ml && hard != expected) flips++;
      end
    end
    if (flips == 0) failures++;
    $display("parity corrections=%0d", flips);
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
