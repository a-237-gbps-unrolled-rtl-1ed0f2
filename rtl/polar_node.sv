// polar_node: one node of the unrolled, pipelined Fast-SSC decoder tree.
// Instantiated recursively, it builds the whole decoder for the code whose
// frozen-bit mask it is given.
//
// At elaboration the node classifies its subcode (polar_pkg::node_kind):
//   Rate-0   all bits frozen: beta = 0, no logic and no delay;
//   Rate-1   no bit frozen: polar_rate1_stage;
//   Rep      only the last bit free, length <= REP_MAX: polar_rep_stage;
//   SPC      only the first bit frozen, length <= SPC_MAX: polar_spc_stage;
//   split    anything else, decoded through its halves:
//
//     alpha --F--> left child --beta_l--------(chain 1+LAT_R)--+
//       |                         |                            Comb --> beta
//       +--(chain 1+LAT_L)--> G --+--> right child --beta_r----+
//
// F, G and Comb are each one pipeline stage (polar_f_stage, polar_g_stage,
// polar_comb_stage). The register chains (polar_delay_line) hold alpha for
// the F stage plus the left subtree, and beta_l for the G stage plus the
// right subtree, so that every stage sees the messages of one frame; the
// pipeline then accepts a new frame every clock. This structure is the
// paper's (its 8-bit example: F8, Rep4, G8, SPC4, Comb8 in five stages with
// chains on alpha_c and beta_1).
//
// A split node takes LAT = 3 + LAT_L + LAT_R clocks in all cases. When the
// left child is Rate-0 the F unit is not built (its slot becomes part of the
// alpha chain) and G uses beta_l = 0; when the right child is Rate-0 the G
// unit is not built and beta_r = 0. Keeping the three slots is this design's
// reading of the paper; with it the (1024,512) code used here has the
// paper's latency of 559 clocks.
//
// Timing: beta is registered, LAT clocks after alpha (LAT = 0 only for a
// Rate-0 node, whose beta is constant).
//
// Lint note: when this module is linted on its own as the top, Verilator
// reports beta_l and beta_r as undriven. They are driven by the output port
// of the recursive child instance (or tied to zero for a Rate-0 child); the
// report does not appear when the tree is elaborated under polar_decoder,
// and simulation of both confirms the connection.
module polar_node #(
  parameter int unsigned N             = 8,
  parameter int unsigned Q             = 5,
  parameter logic [N-1:0] FROZEN       = 8'h17,
  parameter int unsigned REP_MAX       = 4,
  parameter int unsigned SPC_MAX       = 4,
  parameter int unsigned RAM_MIN_DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0][Q-1:0] alpha,
  output logic [N-1:0]        beta
);
  import polar_pkg::*;

  localparam logic [NMAX-1:0] FZ = NMAX'(FROZEN);
  localparam node_kind_e KIND = node_kind(FZ, N, REP_MAX, SPC_MAX);
  localparam int unsigned LAT = node_latency(FZ, N, REP_MAX, SPC_MAX);

  if (KIND == NODE_RATE0) begin : g_rate0
    assign beta = '0;
    logic unused;
    assign unused = &{1'b0, clk, rst_n, alpha};
  end else if (KIND == NODE_RATE1) begin : g_rate1
    polar_rate1_stage #(.N(N), .Q(Q)) u_dec (.clk, .alpha, .beta);
    logic unused;
    assign unused = rst_n;
  end else if (KIND == NODE_REP) begin : g_rep
    polar_rep_stage #(.N(N), .Q(Q)) u_dec (.clk, .alpha, .beta);
    logic unused;
    assign unused = rst_n;
  end else if (KIND == NODE_SPC) begin : g_spc
    polar_spc_stage #(.N(N), .Q(Q)) u_dec (.clk, .alpha, .beta);
    logic unused;
    assign unused = rst_n;
  end else begin : g_split
    localparam int unsigned H = N / 2;
    localparam logic [H-1:0] FROZEN_L = FROZEN[H-1:0];
    localparam logic [H-1:0] FROZEN_R = FROZEN[N-1:H];
    localparam bit L0 = node_kind(NMAX'(FROZEN_L), H, REP_MAX, SPC_MAX) == NODE_RATE0;
    localparam bit R0 = node_kind(NMAX'(FROZEN_R), H, REP_MAX, SPC_MAX) == NODE_RATE0;
    localparam int unsigned LAT_L = node_latency(NMAX'(FROZEN_L), H, REP_MAX, SPC_MAX);
    localparam int unsigned LAT_R = node_latency(NMAX'(FROZEN_R), H, REP_MAX, SPC_MAX);

    logic [H-1:0][Q-1:0] alpha_l, alpha_r;
    logic [N-1:0][Q-1:0] alpha_d;   // alpha, aligned with beta_l at G
    logic [H-1:0]        beta_l, beta_l_d, beta_r;

    // F slot and left subtree.
    if (L0) begin : g_left_rate0
      assign alpha_l = '0;
      assign beta_l  = '0;
    end else begin : g_left
      polar_f_stage #(.N(N), .Q(Q)) u_f (.clk, .alpha, .alpha_l);
      polar_node #(
        .N(H), .Q(Q), .FROZEN(FROZEN_L), .REP_MAX(REP_MAX), .SPC_MAX(SPC_MAX),
        .RAM_MIN_DEPTH(RAM_MIN_DEPTH)
      ) u_left (.clk, .rst_n, .alpha(alpha_l), .beta(beta_l));
    end

    // alpha waits for the F slot and the left subtree.
    polar_delay_line #(.W(N * Q), .DEPTH(1 + LAT_L), .RAM_MIN_DEPTH(RAM_MIN_DEPTH)) u_alpha_chain (
      .clk, .rst_n, .din(alpha), .dout(alpha_d)
    );

    // G slot and right subtree.
    if (R0) begin : g_right_rate0
      assign alpha_r = '0;
      assign beta_r  = '0;
      logic unused;
      assign unused = &{1'b0, alpha_d};
    end else begin : g_right
      polar_g_stage #(.N(N), .Q(Q)) u_g (.clk, .alpha(alpha_d), .beta_l, .alpha_r);
      polar_node #(
        .N(H), .Q(Q), .FROZEN(FROZEN_R), .REP_MAX(REP_MAX), .SPC_MAX(SPC_MAX),
        .RAM_MIN_DEPTH(RAM_MIN_DEPTH)
      ) u_right (.clk, .rst_n, .alpha(alpha_r), .beta(beta_r));
    end

    // beta_l waits for the G slot and the right subtree.
    polar_delay_line #(.W(H), .DEPTH(1 + LAT_R), .RAM_MIN_DEPTH(RAM_MIN_DEPTH)) u_beta_chain (
      .clk, .rst_n, .din(beta_l), .dout(beta_l_d)
    );

    polar_comb_stage #(.N(N)) u_comb (.clk, .beta_l(beta_l_d), .beta_r, .beta);

    logic unused;
    assign unused = &{1'b0, alpha_l, alpha_r};
  end

endmodule
