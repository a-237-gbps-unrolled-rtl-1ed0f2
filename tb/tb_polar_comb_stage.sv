// tb_polar_comb_stage: random child decisions through polar_comb_stage
// (N = 16). Each output is compared, one clock later, with the polar
// butterfly [beta_l ^ beta_r, beta_r] built bit by bit here.
module tb_polar_comb_stage;
  localparam int N = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [N/2-1:0] beta_l, beta_r;
  logic [N-1:0]   beta, expected;
  polar_comb_stage #(.N(N)) dut (.clk, .beta_l, .beta_r, .beta);

  int checks = 0, failures = 0;

  initial begin
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (t > 0) begin
        checks++;
        if (beta !== expected) begin
          failures++;
          $display("t=%0d got %h expected %h", t, beta, expected);
        end
      end
      beta_l = (N / 2)'($urandom);
      beta_r = (N / 2)'($urandom);
      for (int i = 0; i < N / 2; i++) begin
        expected[i]         = beta_l[i] ^ beta_r[i];
        expected[i + N / 2] = beta_r[i];
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
