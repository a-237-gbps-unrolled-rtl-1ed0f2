// polar_delay_line: a fixed delay of DEPTH clocks on a W-bit word, the
// "register chain" that keeps a message aligned with the frame it belongs to
// while that frame's other messages are still being computed.
//
// The paper adds pipeline stages without logic to keep messages in step and
// says that its register chains are placed in the FPGA's RAM blocks. Here a
// chain shorter than RAM_MIN_DEPTH is a shift register; a longer one is a
// circular buffer of DEPTH-1 words written and read at the same address
// every clock, followed by an output register, so that a synthesis tool can
// put it in block RAM. The threshold is this design's choice.
//
// Timing: dout(t) = din(t - DEPTH); DEPTH = 0 is a plain wire. Only the RAM
// address counter is reset (rst_n, asynchronous, active low); the data
// words are not, so dout is meaningless for the first DEPTH clocks.
module polar_delay_line #(
  parameter int unsigned W             = 8,
  parameter int unsigned DEPTH         = 4,
  parameter int unsigned RAM_MIN_DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  if (DEPTH == 0) begin : g_wire
    assign dout = din;
    logic unused;
    assign unused = &{1'b0, clk, rst_n};
  end else if (DEPTH < RAM_MIN_DEPTH || DEPTH < 2) begin : g_shift
    logic [W-1:0] chain [DEPTH];
    always_ff @(posedge clk) begin
      chain[0] <= din;
      for (int i = 1; i < DEPTH; i++) chain[i] <= chain[i-1];
    end
    assign dout = chain[DEPTH-1];
    logic unused;
    assign unused = rst_n;
  end else begin : g_ram
    localparam int unsigned WORDS = DEPTH - 1;
    localparam int unsigned AW    = (WORDS > 1) ? $clog2(WORDS) : 1;
    logic [W-1:0]  mem [WORDS];
    logic [AW-1:0] addr;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                       addr <= '0;
      else if (addr == AW'(WORDS - 1))  addr <= '0;
      else                              addr <= addr + AW'(1);
    end
    always_ff @(posedge clk) begin
      mem[addr] <= din;
      dout      <= mem[addr];
    end
  end

endmodule
