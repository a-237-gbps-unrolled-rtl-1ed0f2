// tb_polar_rep_stage: random LLRs through polar_rep_stage at the paper's
// largest repetition length, 4, and at length 2. One clock after its input
// every output bit must equal the sign of the LLR sum (a zero sum decides 0),
// worked out here in integers.
module tb_polar_rep_stage;
  localparam int Q = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [3:0][Q-1:0] a4;
  logic [1:0][Q-1:0] a2;
  logic [3:0] b4, e4;
  logic [1:0] b2, e2;
  polar_rep_stage #(.N(4), .Q(Q)) dut4 (.clk, .alpha(a4), .beta(b4));
  polar_rep_stage #(.N(2), .Q(Q)) dut2 (.clk, .alpha(a2), .beta(b2));

  int checks = 0, failures = 0;

  initial begin
    for (int t = 0; t < 3000; t++) begin
      automatic int s4 = 0, s2 = 0;
      @(negedge clk);
      if (t > 0) begin
        checks += 2;
        if (b4 !== e4) begin failures++; $display("t=%0d rep4 got %b expected %b", t, b4, e4); end
        if (b2 !== e2) begin failures++; $display("t=%0d rep2 got %b expected %b", t, b2, e2); end
      end
      for (int i = 0; i < 4; i++) begin a4[i] = Q'(int'($urandom % 31) - 15); s4 += $signed(a4[i]); end
      for (int i = 0; i < 2; i++) begin a2[i] = Q'(int'($urandom % 31) - 15); s2 += $signed(a2[i]); end
      e4 = (s4 < 0) ? 4'b1111 : 4'b0000;
      e2 = (s2 < 0) ? 2'b11 : 2'b00;
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
