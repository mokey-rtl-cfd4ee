// opp -- Outlier / Post-Processing unit shared by the GPEs of a tile.
//
// Datapath: a G/OT lookup table with two read ports (rD1/rA1, rD2/rA2), one
// multiplier, one adder and an output accumulator with one line per GPE.
// acc[line] <= sat( addA + addB ) with
//   addA = addSelA ? addCnst : product,   addB = addSelB ? 0 : acc[line]
//   product = mulA * mulB, shifted right by frac when both operands are
//   fixed point (mulB = rD2 or accumulator), unshifted when mulB is a count.
//
// Outlier mode (isOtl, the OR of the GPEs' one-hot otlSel): the codes of the
// selected GPE are ORed from the AND-gated otlA/otlW buses; rA1 reads that
// activation's centroid, rA2 that weight's centroid, and their product is
// added to the selected GPE's accumulator line. One pair per cycle. Outlier
// mode overrides the select inputs.
// Post-processing mode (ppEnb): line = ppPESel; mulA = rD1 (or mulCnst),
// rA1 reads the base of the CRF line being scanned ({sumSel, ppAddr}), mulB
// is the sData of GPE ppPESel, so the accumulator gathers count x base.
// Sums saturate to DATA_W bits. Accumulator line rAddr is read on rData.
//
// LUT map (128 x DATA_W, written through lutWe/lutWAddr/lutWData):
//   0..31   activation dictionary, addressed by the 5-bit code
//   32..63  weight dictionary, addressed by the 5-bit code
//   64..127 post-processing bases, addressed by {sumSel, ppAddr}
// The paper draws one 16x16 G/OT-LUT; it needs a G and an OT dictionary for
// each operand plus the bases, so this design gives each of those its own
// 16-entry section. The datapath shape (LUT, multiplier, adder, 8x16
// accumulator, the named selects) follows the paper's figure; the mux
// inputs, the shift by frac and saturation are this design's choices.
// Timing: one operation per cycle, result visible the cycle after.
// Lint note: rst_n is both the asynchronous reset and the assertion's
// disable condition, which the linter reports as sync/async use; it stands.
module opp
  import mokey_pkg::*;
#(
  parameter int unsigned NUM_GPE = 8,
  parameter int unsigned DATA_W  = 16,
  parameter int unsigned CNT_W   = 8,
  localparam int unsigned PW     = (NUM_GPE > 1) ? $clog2(NUM_GPE) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // LUT load port
  input  logic                     lutWe,
  input  logic [6:0]               lutWAddr,
  input  logic signed [DATA_W-1:0] lutWData,
  // from the GPEs
  input  logic [NUM_GPE-1:0]       otlSel,
  input  code_t                    otlA [NUM_GPE],
  input  code_t                    otlW [NUM_GPE],
  input  logic signed [CNT_W-1:0]  sData [NUM_GPE],
  output logic                     isOtl,
  // post-processing controls
  input  logic                     ppEnb,
  input  logic [PW-1:0]            ppPESel,
  input  logic [3:0]               ppAddr,
  input  sum_sel_e                 sumSel,
  input  logic                     addSelA,
  input  logic                     addSelB,
  input  logic                     mulSelA,
  input  mulb_sel_e                mulSelB,
  input  logic signed [DATA_W-1:0] addCnst,
  input  logic signed [DATA_W-1:0] mulCnst,
  input  logic [3:0]               frac,
  // accumulator read port
  input  logic [PW-1:0]            rAddr,
  output logic signed [DATA_W-1:0] rData
);

  localparam int unsigned PRW = 2 * DATA_W;   // product width
  localparam int unsigned SW  = PRW + 2;      // sum width

  logic signed [DATA_W-1:0] lut [128];
  logic signed [DATA_W-1:0] acc [NUM_GPE];

  code_t          selA, selW;
  logic [PW-1:0]  otlPe, line;
  logic [6:0]     rA1, rA2;
  logic signed [DATA_W-1:0] rD1, rD2, accRd, mulA, mulB;
  logic signed [PRW-1:0]    prod, prodSh;
  logic signed [SW-1:0]     sum;
  logic                     doShift, wEnb;
  logic signed [DATA_W-1:0] sumSat;

  // OR level of the outlier routing and one-hot to binary encoding
  always_comb begin
    selA  = '0;
    selW  = '0;
    otlPe = '0;
    for (int i = 0; i < NUM_GPE; i++) begin
      selA = selA | otlA[i];
      selW = selW | otlW[i];
      if (otlSel[i]) otlPe = PW'(i);
    end
  end
  assign isOtl = |otlSel;

  // LUT
  always_ff @(posedge clk) begin
    if (lutWe) lut[lutWAddr] <= lutWData;
  end
  assign rA1 = isOtl ? {2'b00, selA} : {1'b1, sumSel, ppAddr};
  assign rA2 = {2'b01, selW};
  assign rD1 = lut[rA1];
  assign rD2 = lut[rA2];

  // datapath
  assign line  = isOtl ? otlPe : ppPESel;
  assign accRd = acc[line];
  assign wEnb  = isOtl | ppEnb;

  always_comb begin
    if (isOtl) begin
      mulA    = rD1;
      mulB    = rD2;
      doShift = 1'b1;
    end else begin
      mulA = mulSelA ? mulCnst : rD1;
      case (mulSelB)
        MULB_RD2: begin mulB = rD2;   doShift = 1'b1; end
        MULB_ACC: begin mulB = accRd; doShift = 1'b1; end
        default:  begin mulB = DATA_W'(sData[ppPESel]); doShift = 1'b0; end
      endcase
    end
    prod   = PRW'(mulA) * PRW'(mulB);
    prodSh = doShift ? (prod >>> frac) : prod;
    if (!isOtl && addSelA) sum = SW'(addCnst);
    else                   sum = SW'(prodSh);
    if (isOtl || !addSelB) sum = sum + SW'(accRd);
    if (sum > SW'(2**(DATA_W-1) - 1))   sumSat = {1'b0, {(DATA_W-1){1'b1}}};
    else if (sum < -SW'(2**(DATA_W-1))) sumSat = {1'b1, {(DATA_W-1){1'b0}}};
    else                                sumSat = DATA_W'(sum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_GPE; i++) acc[i] <= '0;
    end else if (wEnb) begin
      acc[line] <= sumSat;
    end
  end

  assign rData = acc[rAddr];

  // at most one GPE may win the outlier slot
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(otlSel))
    else $error("opp: more than one otlSel");

endmodule
