// gpe -- Gaussian Processing Element.
//
// Each cycle with gEnb high the GPE takes one activation code and one weight
// code. If both are Gaussian it never looks at a centroid: it adds the two
// 3-bit exponent indexes, XORs the two signs and counts +1 (equal signs) or
// -1 (different signs) into four counter register files:
//   SoI  (15 lines) at idxA+idxW,  SoA1 (8 lines) at idxA,
//   SoW1 (8 lines)  at idxW,       PoM1 (1 line).
// Multiplying each count by its base (a^k, b*a^k, b^2, with the tensor
// scales folded in) and summing gives the Gaussian part of the dot product;
// the OPP does that after the last input.
//
// If either code is an outlier the pair is not counted. The GPE is then one
// cell of a serial leading-one detector running from GPE0 (isOtlPrv = 0)
// upwards: isOtlNxt = isOtlPrv | isOtlCur. The first GPE with an outlier
// raises otlSel and drives its two codes onto otlA/otlW (AND-gated, the OPP
// ORs all GPEs); every later GPE with an outlier raises hldA/hldW so that its
// channels present the same pair again next cycle.
//
// Post-processing: sumSel picks one CRF and ppAddr one of its lines; the
// count appears combinationally on sData. clr zeroes all CRFs.
//
// Counting, CRF sizes, the hold/leading-one scheme and the AND/OR routing
// follow the paper. Using gEnb as the per-lane "pair valid" and holding both
// channels together are this design's choices.
module gpe
  import mokey_pkg::*;
#(
  parameter int unsigned CNT_W = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    gEnb,      // a valid pair is on codeA/codeW
  input  logic                    clr,       // clear all counters
  // activation channel
  input  code_t                   codeA,
  output logic                    hldA,
  // weight channel
  input  code_t                   codeW,
  output logic                    hldW,
  // outlier scheduling chain
  input  logic                    isOtlPrv,
  output logic                    isOtlNxt,
  output logic                    otlSel,
  output code_t                   otlA,
  output code_t                   otlW,
  // post-processing read-out
  input  logic [3:0]              ppAddr,
  input  sum_sel_e                sumSel,
  output logic signed [CNT_W-1:0] sData
);

  logic isOtlCur, cntEn, up;
  logic [3:0] sumIdx;
  logic signed [CNT_W-1:0] rSoI, rSoA1, rSoW1, rPoM1;

  assign isOtlCur = gEnb & (codeA.is_ot | codeW.is_ot);
  assign otlSel   = isOtlCur & ~isOtlPrv;
  assign isOtlNxt = isOtlPrv | isOtlCur;
  assign hldA     = isOtlCur & isOtlPrv;
  assign hldW     = isOtlCur & isOtlPrv;
  assign otlA     = otlSel ? codeA : '0;
  assign otlW     = otlSel ? codeW : '0;

  assign cntEn  = gEnb & ~isOtlCur;
  assign up     = ~(codeA.sign ^ codeW.sign);
  assign sumIdx = {1'b0, codeA.idx} + {1'b0, codeW.idx};

  crf #(.DEPTH(SOI_DEPTH), .CNT_W(CNT_W)) u_soi (
    .clk, .rst_n, .clr, .wEn(cntEn), .wAddr(sumIdx), .upDown(up),
    .rAddr(ppAddr), .rData(rSoI));

  crf #(.DEPTH(SOX_DEPTH), .CNT_W(CNT_W)) u_soa1 (
    .clk, .rst_n, .clr, .wEn(cntEn), .wAddr(codeA.idx), .upDown(up),
    .rAddr(ppAddr[2:0]), .rData(rSoA1));

  crf #(.DEPTH(SOX_DEPTH), .CNT_W(CNT_W)) u_sow1 (
    .clk, .rst_n, .clr, .wEn(cntEn), .wAddr(codeW.idx), .upDown(up),
    .rAddr(ppAddr[2:0]), .rData(rSoW1));

  crf #(.DEPTH(1), .CNT_W(CNT_W)) u_pom1 (
    .clk, .rst_n, .clr, .wEn(cntEn), .wAddr(1'b0), .upDown(up),
    .rAddr(1'b0), .rData(rPoM1));

  always_comb begin
    case (sumSel)
      SUM_SOI:  sData = rSoI;
      SUM_SOA1: sData = rSoA1;
      SUM_SOW1: sData = rSoW1;
      default:  sData = rPoM1;
    endcase
  end

endmodule
