// mokey_pkg -- types and constants shared by the Mokey tile.
//
// A quantized value travels on chip as a 5-bit code {dictionary select,
// sign, 3-bit index}: dictionary select 0 picks the Gaussian (G) dictionary,
// 1 the outlier (OT) dictionary. The 3-bit index is the exponent "int" of
// the centroid theta*(a^int + b)*s + m. Off chip the dictionary select bit is
// dropped and kept in a separate list of outlier positions, leaving the
// 4-bit index {sign, idx}. The field order follows the paper; the bit
// positions inside the code are this design's choice.
package mokey_pkg;

  localparam int unsigned IDX_W       = 3;   // exponent index width (paper)
  localparam int unsigned SOI_DEPTH   = 15;  // idxA+idxW spans 0..14 (paper)
  localparam int unsigned SOX_DEPTH   = 8;   // idxA or idxW spans 0..7 (paper)
  localparam int unsigned GROUP_VALS  = 64;  // values per outlier-pointer group (paper)
  localparam int unsigned LINE_VALS   = 16;  // 4-bit values per off-chip line (paper, Fig. 5)
  localparam int unsigned PTR_W       = 6;   // outlier pointer / count width (paper, Fig. 5)

  // On-chip 5-bit code.
  typedef struct packed {
    logic             is_ot;  // 1: outlier dictionary, 0: Gaussian dictionary
    logic             sign;   // 1: negative
    logic [IDX_W-1:0] idx;    // exponent index 0..7
  } code_t;

  // Which counter register file drives sData during post-processing.
  typedef enum logic [1:0] {
    SUM_SOI  = 2'd0,
    SUM_SOA1 = 2'd1,
    SUM_SOW1 = 2'd2,
    SUM_POM1 = 2'd3
  } sum_sel_e;

  // Multiplier operand B select in the OPP.
  typedef enum logic [1:0] {
    MULB_SDATA = 2'd0,  // count from the selected GPE (integer)
    MULB_RD2   = 2'd1,  // second LUT read port (fixed point)
    MULB_ACC   = 2'd2   // output accumulator line (fixed point)
  } mulb_sel_e;

  // Number of CRF lines each summation has.
  function automatic int unsigned sum_depth(sum_sel_e s);
    case (s)
      SUM_SOI:  return SOI_DEPTH;
      SUM_SOA1: return SOX_DEPTH;
      SUM_SOW1: return SOX_DEPTH;
      default:  return 1;
    endcase
  endfunction

endpackage
