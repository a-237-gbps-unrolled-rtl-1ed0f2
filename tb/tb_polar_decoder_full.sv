// tb_polar_decoder_full: end-to-end test of polar_decoder at its default
// parameters, the (1024,512) code, with the latency the tree should have (559
// clocks, the figure the paper reports, plus the input register). Same checks
// as tb_polar_decoder, on fewer frames.
//
// Random information bits are encoded (x = u F^{(x)n}), sent over a BPSK /
// AWGN channel at several noise levels and quantised to 5-bit LLRs. Frames
// enter back to back with occasional idle clocks. For every output frame the
// testbench checks that it arrives exactly LATENCY clocks after its input,
// that it equals the bit-exact prediction of the behavioural Fast-SSC
// decoder, and, for noiseless frames, that it is the transmitted codeword.
// It also counts the mechanisms that must occur at least once: frames on
// consecutive clocks, idle clocks, SPC parity corrections, G saturation,
// channel errors the decoder corrected, and a reset in the middle of the
// stream that must clear every frame in flight.
module tb_polar_decoder_full;
  import polar_ref_pkg::*;

  localparam int N = 1024, Q = 5;
  localparam logic [N-1:0] FZ = polar_pkg::FROZEN_1024_512;
  localparam int TREE_LAT = 559;        // the paper's latency for (1024,512)
  localparam int LATENCY  = 1 + TREE_LAT;
  localparam int FRAMES   = 1300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                in_valid = 0, out_valid;
  logic [N-1:0][Q-1:0] alpha_c;
  logic [N-1:0]        beta_c;

  polar_decoder dut (
    .clk, .rst_n, .in_valid, .alpha_c, .out_valid, .beta_c
  );

  typedef struct {
    bits_q expected;
    bits_q sent;
    bit    noiseless;
    bit    had_errors;
    int    t_in;
  } frame_t;

  frame_t pending [$];
  int checks = 0, failures = 0, cycle = 0;
  int back_to_back = 0, idle_clocks = 0, corrected = 0, noiseless_ok = 0, flushed = 0;
  bit last_out = 0;
  bits_q fz;

  always @(posedge clk) cycle <= cycle + 1;

  // Output side: sample just before each rising edge.
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      if (pending.size() == 0) begin
        failures++;
        $display("cycle %0d: output with no frame pending", cycle);
      end else begin
        automatic frame_t f = pending.pop_front();
        automatic bit ok = 1;
        checks++;
        if (cycle - f.t_in != LATENCY) begin
          failures++;
          $display("latency %0d, expected %0d", cycle - f.t_in, LATENCY);
        end
        for (int i = 0; i < N; i++) if (beta_c[i] != f.expected[i]) ok = 0;
        checks++;
        if (!ok) begin failures++; $display("cycle %0d: decision differs from reference", cycle); end
        if (f.noiseless) begin
          automatic bit same = 1;
          for (int i = 0; i < N; i++) if (beta_c[i] != f.sent[i]) same = 0;
          checks++;
          if (!same) begin failures++; $display("noiseless frame not decoded to the sent codeword"); end
          else noiseless_ok++;
        end
        if (f.had_errors) begin
          automatic bit same = 1;
          for (int i = 0; i < N; i++) if (beta_c[i] != f.sent[i]) same = 0;
          if (same) corrected++;
        end
        if (last_out) back_to_back++;
      end
    end
    last_out = out_valid;
  end

  task automatic send_frame(real sigma);
    automatic bits_q u = new[N];
    automatic bits_q x;
    automatic llr_q a;
    automatic frame_t f;
    foreach (u[i]) u[i] = fz[i] ? 1'b0 : 1'($urandom);
    x = encode(u);
    if (sigma == 0.0) begin
      a = new[N];
      foreach (a[i]) a[i] = x[i] ? -7 : 7;
    end else a = channel(x, sigma, 2.0, Q);
    f.sent = x;
    f.expected = decode(a, fz, Q);
    f.noiseless = (sigma == 0.0);
    f.had_errors = 0;
    foreach (a[i]) if ((a[i] < 0) != x[i]) f.had_errors = 1;
    f.t_in = cycle;
    for (int i = 0; i < N; i++) alpha_c[i] = Q'(a[i]);
    in_valid = 1;
    pending.push_back(f);
  endtask

  initial begin
    static real sigmas [4] = '{0.0, 0.5, 0.7, 0.9};
    fz = new[N];
    for (int i = 0; i < N; i++) fz[i] = FZ[i];
    alpha_c = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      @(negedge clk);
      in_valid = 0;
      if ($urandom % 8 == 0) begin idle_clocks++; continue; end
      send_frame(sigmas[$urandom % 4]);
      // Reset in the middle of the stream: all frames in flight are dropped.
      if (f == FRAMES / 2) begin
        @(negedge clk);
        in_valid = 0;
        rst_n = 0;
        flushed = pending.size();
        pending.delete();
        @(negedge clk);
        rst_n = 1;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (LATENCY + 2) @(negedge clk);
    checks++;
    if (pending.size() != 0) begin failures++; $display("%0d frames never came out", pending.size()); end
    $display("back_to_back=%0d idle_clocks=%0d spc_flips=%0d g_saturations=%0d corrected=%0d noiseless_ok=%0d flushed=%0d",
             back_to_back, idle_clocks, spc_flips, g_saturations, corrected, noiseless_ok, flushed);
    $display("tree nodes decoded: rep=%0d rate1=%0d rate0=%0d", rep_nodes, rate1_nodes, rate0_nodes);
    if (back_to_back == 0) begin failures++; $display("no back-to-back frames"); end
    if (idle_clocks == 0) begin failures++; $display("no idle clocks"); end
    if (spc_flips == 0) begin failures++; $display("no SPC parity correction"); end
    if (g_saturations == 0) begin failures++; $display("no G saturation"); end
    if (corrected == 0) begin failures++; $display("no channel error corrected"); end
    if (noiseless_ok == 0) begin failures++; $display("no noiseless frame"); end
    if (flushed == 0) begin failures++; $display("reset did not drop any frame"); end
    if (rep_nodes == 0 || rate1_nodes == 0 || rate0_nodes == 0) begin failures++; $display("a node type never ran"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (FRAMES * 2 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
