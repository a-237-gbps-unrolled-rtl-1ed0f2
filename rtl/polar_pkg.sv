// polar_pkg: shared types, constants and elaboration-time functions of the
// unrolled Fast-SSC polar decoder.
//
// A polar code of length N is described by its frozen-bit mask: bit i is 1
// when u_i is frozen (always 0). From the mask alone the decoder tree is
// built at elaboration: node_kind() classifies a (sub)code as Rate-0 (all
// frozen), Rate-1 (none frozen), repetition (only the last bit free, length
// <= rep_max), single parity check (only the first bit frozen, length <=
// spc_max) or a split node that is decoded through its two halves.
// node_latency() gives the pipeline depth of a subtree: one clock for each
// leaf decoder, none for a Rate-0 leaf, and three slots (F, G, Comb) plus
// the children's depths for a split node.
//
// Frozen masks. The paper fixes the (8,4) example (u0, u1, u2, u4 frozen) and
// the (1024,512) code size but not its construction. The masks below are
// the K most reliable positions by the Bhattacharyya recursion
//   Z(1) = z0,  Z_bad = 2Z - Z^2 (index bit 0),  Z_good = Z^2 (index bit 1),
// applied from the most significant index bit down, with z0 = 0.2 (ties go to
// the higher index). For N = 8 it reproduces the paper's example; for
// N = 1024 it gives a tree whose latency equals the 559 cycles the paper
// reports, which is why this z0 was chosen.
package polar_pkg;

  // Largest code length any mask argument may describe.
  localparam int unsigned NMAX = 1024;

  typedef enum logic [2:0] {
    NODE_RATE0,
    NODE_RATE1,
    NODE_REP,
    NODE_SPC,
    NODE_SPLIT
  } node_kind_e;

  // Frozen masks, bit i = u_i frozen, K = N/2.
  localparam logic [7:0]   FROZEN_8_4    = 8'h17;
  localparam logic [15:0]  FROZEN_16_8   = 16'h017f;
  localparam logic [31:0]  FROZEN_32_16  = 32'h001717ff;
  localparam logic [63:0]  FROZEN_64_32  = 64'h0001011f077f7fff;
  localparam logic [127:0] FROZEN_128_64 = 128'h000000030017177f011717ff3fffffff;
  localparam logic [255:0] FROZEN_256_128 =
    256'h000000010001011700010117011f7fff0001017f177f7fff177fffffffffffff;
  localparam logic [1023:0] FROZEN_1024_512 = {
    256'h000000000000000000000000000000170000000000010117000101170117177f,
    256'h0000000100010117000101170117177f0001011701177fff077f7fff7fffffff,
    256'h00000001000101170001011f017f7fff0003177f177f7fff177fffffffffffff,
    256'h0117177f17ffffff7fffffffffffffff7fffffffffffffffffffffffffffffff
  };

  // Low n bits set.
  function automatic logic [NMAX-1:0] low_mask(input int unsigned n);
    return (n >= NMAX) ? '1 : ((NMAX'(1) << n) - NMAX'(1));
  endfunction

  function automatic node_kind_e node_kind(input logic [NMAX-1:0] frozen,
                                           input int unsigned n,
                                           input int unsigned rep_max,
                                           input int unsigned spc_max);
    logic [NMAX-1:0] m;
    logic [NMAX-1:0] f;
    m = low_mask(n);
    f = frozen & m;
    if (f == m)                              return NODE_RATE0;
    if (f == '0)                             return NODE_RATE1;
    if (n <= rep_max && f == (m >> 1))       return NODE_REP;
    if (n <= spc_max && f == NMAX'(1))       return NODE_SPC;
    return NODE_SPLIT;
  endfunction

  // Clock cycles from a node's alpha input to its registered beta output.
  function automatic int unsigned node_latency(input logic [NMAX-1:0] frozen,
                                               input int unsigned n,
                                               input int unsigned rep_max,
                                               input int unsigned spc_max);
    case (node_kind(frozen, n, rep_max, spc_max))
      NODE_RATE0: return 0;
      NODE_SPLIT: return 3
          + node_latency(frozen & low_mask(n / 2), n / 2, rep_max, spc_max)
          + node_latency((frozen >> (n / 2)) & low_mask(n / 2), n / 2, rep_max, spc_max);
      default:    return 1;
    endcase
  endfunction

  // Largest LLR magnitude kept: the range is symmetric, -(2^(q-1)-1) .. 2^(q-1)-1.
  function automatic int llr_max(input int unsigned q);
    return (1 << (q - 1)) - 1;
  endfunction

endpackage
