// mokey_top -- One Mokey tile with its off-chip format converters.
//
// NUM_GPE Gaussian PEs (gpe) each take one (activation, weight) pair of
// 5-bit codes per cycle from their own input channel and count the
// Gaussian products on dictionary indexes. Pairs holding an outlier go,
// one per cycle, to the shared outlier/post-processing unit (opp) which
// multiplies their looked-up 16-bit centroids; later GPEs with an outlier
// in the same cycle are held (hldA/hldW) by the cascaded leading-one chain.
// After the last pair the controller (pp_ctrl) scans every GPE's counters
// through the OPP, producing one 16-bit output activation per GPE, and
// feeds each to the output quantizer (out_quant). Its 5-bit codes leave on
// qValid/qCode for an on-chip buffer and also go through the packer
// (ot_pack), which writes the off-chip format (value lines plus outlier
// pointer lists). An unpacker (ot_unpack) converts that format back into
// 5-bit codes on the load side, and a decompression engine
// (decomp_engine) expands codes into 16-bit values for consumers that need
// them (memory-compression-only use). On-chip buffers and DRAM are outside
// this module: their connections are ports.
//
// Operation: load the LUTs (lut*, qd*, dec*), pulse start, stream pairs on
// laneValid/aCode/wCode (a lane's pair is consumed in a cycle where busy
// computing and hldA is low), raise computeDone, wait for done. oaValid /
// oaData show each output activation before quantization.
// Compression-only use: values from another accelerator enter the same
// quantizer on extOaValid/extOa/extOaReady (a value moves when valid and
// ready are both high, at most one every other cycle) and leave as codes
// and in the off-chip format like the tile's own outputs.
//
// The GPE/OPP organisation, the outlier scheduling, the quantizer and the
// formats follow the paper. The controller, the LUT map and the handshakes
// are this design's choices (see each module).
//
// The last GPE's isOtlNxt (otlChain[NUM_GPE]) is the wire the paper's
// figure draws as isOtl into the OPP; the OPP forms isOtl itself from the
// one-hot otlSel, and an assertion checks that the two agree.
// Lint note that stands: rst_n is seen both as the flops' asynchronous
// reset and in the assertions' disable condition.
module mokey_top
  import mokey_pkg::*;
#(
  parameter int unsigned NUM_GPE   = 8,
  parameter int unsigned DATA_W    = 16,
  parameter int unsigned CNT_W     = 8,
  parameter int unsigned QENT      = 32,
  parameter int unsigned DEC_LANES = 16,
  localparam int unsigned PW       = (NUM_GPE > 1) ? $clog2(NUM_GPE) : 1,
  localparam int unsigned QW       = $clog2(QENT)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // control
  input  logic                     start,
  input  logic                     computeDone,
  output logic                     busy,
  output logic                     done,
  input  logic [3:0]               frac,
  input  logic signed [DATA_W-1:0] cnst [NUM_GPE],
  input  logic signed [DATA_W-1:0] mulCnst,
  // input channels, one per GPE
  input  logic [NUM_GPE-1:0]       laneValid,
  input  code_t                    aCode [NUM_GPE],
  input  code_t                    wCode [NUM_GPE],
  output logic [NUM_GPE-1:0]       hldA,
  output logic [NUM_GPE-1:0]       hldW,
  output logic                     laneEn,
  // OPP LUT load
  input  logic                     lutWe,
  input  logic [6:0]               lutWAddr,
  input  logic signed [DATA_W-1:0] lutWData,
  // quantizer dictionary load
  input  logic                     qdWe,
  input  logic [QW-1:0]            qdWAddr,
  input  logic signed [DATA_W-1:0] qdWCent,
  input  code_t                    qdWCode,
  // results
  output logic                     oaValid,
  output logic signed [DATA_W-1:0] oaData,
  output logic                     qValid,
  output code_t                    qCode,
  output logic [QW-1:0]            qPos,
  // values from outside the tile to be quantized (compression-only use)
  input  logic                     extOaValid,
  input  logic signed [DATA_W-1:0] extOa,
  output logic                     extOaReady,
  // off-chip format, store side
  output logic                     stLineValid,
  output logic [4*LINE_VALS-1:0]   stLineData,
  output logic                     stPtrValid,
  output logic [PTR_W-1:0]         stPtrData,
  // off-chip format, load side
  input  logic                     ldPtrValid,
  input  logic [PTR_W-1:0]         ldPtrData,
  output logic                     ldPtrReady,
  input  logic                     ldLineValid,
  input  logic [4*LINE_VALS-1:0]   ldLineData,
  output logic                     ldLineReady,
  output logic                     ldValid,
  output code_t                    ldCodes [LINE_VALS],
  input  logic                     ldReady,
  // decompression engine
  input  logic                     decLutWe,
  input  logic [4:0]               decLutWAddr,
  input  logic [DATA_W-1:0]        decLutWData,
  input  logic                     decInValid,
  input  code_t                    decInCodes [DEC_LANES],
  output logic                     decOutValid,
  output logic [DATA_W-1:0]        decOutVals [DEC_LANES]
);

  logic                    gEnbAll, crfClr, ppEnb, addSelA, addSelB, mulSelA;
  logic [PW-1:0]           ppPESel, accRdAddr;
  logic [3:0]              ppAddr;
  sum_sel_e                sumSel;
  mulb_sel_e               mulSelB;
  logic signed [DATA_W-1:0] addCnst, accData;
  logic                    ctrlOaValid, packReady, isOtl;
  logic                    qInFree, quantValid;
  logic signed [DATA_W-1:0] quantIn;

  logic [NUM_GPE:0]        otlChain;
  logic [NUM_GPE-1:0]      otlSel;
  code_t                   otlA [NUM_GPE];
  code_t                   otlW [NUM_GPE];
  logic signed [CNT_W-1:0] sData [NUM_GPE];

  assign otlChain[0] = 1'b0;   // GPE0: isOtlPrv = 0
  assign laneEn      = gEnbAll;

  for (genvar g = 0; g < NUM_GPE; g++) begin : g_gpe
    gpe #(.CNT_W(CNT_W)) u_gpe (
      .clk, .rst_n,
      .gEnb     (laneValid[g] & gEnbAll),
      .clr      (crfClr),
      .codeA    (aCode[g]),
      .hldA     (hldA[g]),
      .codeW    (wCode[g]),
      .hldW     (hldW[g]),
      .isOtlPrv (otlChain[g]),
      .isOtlNxt (otlChain[g+1]),
      .otlSel   (otlSel[g]),
      .otlA     (otlA[g]),
      .otlW     (otlW[g]),
      .ppAddr   (ppAddr),
      .sumSel   (sumSel),
      .sData    (sData[g]));
  end

  opp #(.NUM_GPE(NUM_GPE), .DATA_W(DATA_W), .CNT_W(CNT_W)) u_opp (
    .clk, .rst_n,
    .lutWe, .lutWAddr, .lutWData,
    .otlSel, .otlA, .otlW, .sData, .isOtl,
    .ppEnb, .ppPESel, .ppAddr, .sumSel,
    .addSelA, .addSelB, .mulSelA, .mulSelB, .addCnst, .mulCnst, .frac,
    .rAddr(accRdAddr), .rData(accData));

  pp_ctrl #(.NUM_GPE(NUM_GPE), .DATA_W(DATA_W)) u_ctrl (
    .clk, .rst_n, .start, .computeDone, .cnst, .qReady(qInFree),
    .busy, .done, .gEnb(gEnbAll), .crfClr, .ppEnb, .ppPESel, .ppAddr,
    .sumSel, .addSelA, .addSelB, .mulSelA, .mulSelB, .addCnst, .accRdAddr,
    .oaValid(ctrlOaValid));

  // The quantizer has one cycle of latency and the packer takes no more
  // input once it has the 64th value of a group, so a value enters the
  // quantizer only when the packer is ready and no result is in flight.
  // The tile's own outputs have priority over values from outside.
  assign qInFree    = packReady && !qValid;
  assign extOaReady = qInFree && !ctrlOaValid;
  assign quantValid = ctrlOaValid || (extOaValid && extOaReady);
  assign quantIn    = ctrlOaValid ? accData : extOa;

  assign oaValid = ctrlOaValid;
  assign oaData  = accData;

  out_quant #(.NUM_ENT(QENT), .DATA_W(DATA_W)) u_quant (
    .clk, .rst_n,
    .dWe(qdWe), .dWAddr(qdWAddr), .dWCent(qdWCent), .dWCode(qdWCode),
    .oaValid(quantValid), .oa(quantIn),
    .qValid, .qCode, .qPos);

  ot_pack u_pack (
    .clk, .rst_n,
    .inValid(qValid), .inCode(qCode), .inReady(packReady),
    .lineValid(stLineValid), .lineData(stLineData),
    .ptrValid(stPtrValid), .ptrData(stPtrData));

  ot_unpack u_unpack (
    .clk, .rst_n,
    .ptrValid(ldPtrValid), .ptrData(ldPtrData), .ptrReady(ldPtrReady),
    .lineValid(ldLineValid), .lineData(ldLineData), .lineReady(ldLineReady),
    .outValid(ldValid), .outCodes(ldCodes), .outReady(ldReady));

  decomp_engine #(.LANES(DEC_LANES), .DATA_W(DATA_W)) u_dec (
    .clk, .rst_n,
    .lutWe(decLutWe), .lutWAddr(decLutWAddr), .lutWData(decLutWData),
    .inValid(decInValid), .inCodes(decInCodes),
    .outValid(decOutValid), .outVals(decOutVals));

  // The end of the outlier chain is the tile's outlier-present signal;
  // the OPP derives the same signal from the one-hot otlSel.
  assert property (@(posedge clk) disable iff (!rst_n) otlChain[NUM_GPE] == isOtl)
    else $error("mokey_top: outlier chain and OPP disagree");

  // post-processing must never meet an outlier pair
  assert property (@(posedge clk) disable iff (!rst_n) !(isOtl && ppEnb))
    else $error("mokey_top: outlier during post-processing");

endmodule
