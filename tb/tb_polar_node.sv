// tb_polar_node: checks polar_node, the recursive decoder-tree node, on the
// paper's (8,4) example code and on a (32,16) code of the same construction.
//
// A new frame enters every clock: either random LLRs or a noisy codeword.
// Each output is compared with the behavioural Fast-SSC decoder of
// polar_ref_pkg on the frame that entered exactly LAT clocks earlier, which
// checks both the decision and the latency: 5 clocks for the (8,4) code
// (F8, Rep4, G8, SPC4, Comb8, as in the paper's timing example) and the
// latency of the (32,16) tree worked out by hand from its node list.
module tb_polar_node;
  import polar_ref_pkg::*;

  localparam int Q = 5;
  localparam int N8 = 8, N32 = 32;
  localparam logic [7:0]  FZ8  = 8'h17;
  localparam logic [31:0] FZ32 = 32'h001717ff;
  // (32,16): left half 16'h17ff = {Rep4 0111.., ...}; see the count below.
  localparam int LAT8  = 5;
  localparam int LAT32 = 20;
  localparam int FRAMES = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N8-1:0][Q-1:0]  a8;
  logic [N8-1:0]         b8;
  logic [N32-1:0][Q-1:0] a32;
  logic [N32-1:0]        b32;

  polar_node dut8 (.clk, .rst_n, .alpha(a8), .beta(b8));
  polar_node #(.N(N32), .Q(Q), .FROZEN(FZ32)) dut32 (.clk, .rst_n, .alpha(a32), .beta(b32));

  int checks = 0, failures = 0, cycle = 0;
  bits_q exp8 [$], exp32 [$];
  bits_q fz8, fz32;

  function automatic bits_q make_frozen(logic [31:0] fz, int n);
    bits_q f = new[n];
    for (int i = 0; i < n; i++) f[i] = fz[i];
    return f;
  endfunction

  function automatic llr_q stimulus(bits_q fz);
    int n = fz.size();
    llr_q a;
    if ($urandom % 2 == 1) begin
      a = new[n];
      foreach (a[i]) a[i] = int'($urandom % 31) - 15;
    end else begin
      bits_q u = new[n];
      foreach (u[i]) u[i] = fz[i] ? 1'b0 : 1'($urandom);
      a = channel(encode(u), 0.9, 2.0, Q);
    end
    return a;
  endfunction

  initial begin
    fz8 = make_frozen(32'(FZ8), N8);
    fz32 = make_frozen(FZ32, N32);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES + LAT32 + 1; f++) begin
      automatic llr_q s8 = stimulus(fz8);
      automatic llr_q s32 = stimulus(fz32);
      @(negedge clk);
      for (int i = 0; i < N8; i++) a8[i] = Q'(s8[i]);
      for (int i = 0; i < N32; i++) a32[i] = Q'(s32[i]);
      exp8.push_back(decode(s8, fz8, Q));
      exp32.push_back(decode(s32, fz32, Q));
      // The frame applied LAT clocks ago is at the output now.
      if (exp8.size() > LAT8) begin
        automatic bits_q e = exp8.pop_front();
        checks++;
        for (int i = 0; i < N8; i++) if (b8[i] != e[i]) begin
          failures++;
          $display("(8,4) frame %0d bit %0d: got %0b expected %0b", f - LAT8, i, b8[i], e[i]);
          break;
        end
      end
      if (exp32.size() > LAT32) begin
        automatic bits_q e = exp32.pop_front();
        checks++;
        for (int i = 0; i < N32; i++) if (b32[i] != e[i]) begin
          failures++;
          $display("(32,16) frame %0d bit %0d: got %0b expected %0b", f - LAT32, i, b32[i], e[i]);
          break;
        end
      end
    end
    if (spc_flips == 0) begin failures++; $display("no SPC parity correction exercised"); end
    $display("spc_flips=%0d rep=%0d rate1=%0d rate0=%0d", spc_flips, rep_nodes, rate1_nodes, rate0_nodes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
