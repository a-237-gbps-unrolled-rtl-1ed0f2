// tb_polar_delay_line: a numbered word enters every clock into delay lines
// of depth 0, 1, 3 (shift register) and 4, 7, 33 (RAM circular buffer); each
// output must be the word that entered exactly DEPTH clocks earlier.
module tb_polar_delay_line;
  localparam int W = 16;
  localparam int NL = 6;
  localparam int DEPTHS [NL] = '{0, 1, 3, 4, 7, 33};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [W-1:0] din;
  logic [W-1:0] dout [NL];

  for (genvar k = 0; k < NL; k++) begin : g_dl
    polar_delay_line #(.W(W), .DEPTH(DEPTHS[k]), .RAM_MIN_DEPTH(4)) dut (
      .clk, .rst_n, .din, .dout(dout[k])
    );
  end

  int checks = 0, failures = 0;

  initial begin
    din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      din = W'(t + 1000);
      #1;
      for (int k = 0; k < NL; k++) if (t >= DEPTHS[k]) begin
        checks++;
        if (dout[k] !== W'(t - DEPTHS[k] + 1000)) begin
          failures++;
          $display("depth %0d t=%0d got %0d expected %0d", DEPTHS[k], t, dout[k], t - DEPTHS[k] + 1000);
        end
      end
      @(negedge clk);
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
