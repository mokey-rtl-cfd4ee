// decomp_engine -- Decompression engine for memory-compression use.
//
// Expands LANES 5-bit codes per cycle into DATA_W-bit values through a
// 32 x DATA_W lookup table per lane (all lanes hold the same table, loaded
// through lutWe/lutWAddr/lutWData). The table can hold 16-bit fixed-point
// centroids or FP16 bit patterns; the engine does not interpret them.
// inValid/inCodes are registered: outValid/outVals follow one clock later.
//
// The 32x16 LUTs fed by 4-bit indexes plus the 1-bit outlier flag follow
// the paper's decompression-engine drawing. LANES = 16 (one 64-bit line of
// 4-bit values) and the shared load port are this design's choices.
module decomp_engine
  import mokey_pkg::*;
#(
  parameter int unsigned LANES  = 16,
  parameter int unsigned DATA_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lutWe,
  input  logic [4:0]        lutWAddr,
  input  logic [DATA_W-1:0] lutWData,
  input  logic              inValid,
  input  code_t             inCodes [LANES],
  output logic              outValid,
  output logic [DATA_W-1:0] outVals [LANES]
);

  logic [DATA_W-1:0] lut [LANES][32];

  always_ff @(posedge clk) begin
    if (lutWe) for (int l = 0; l < LANES; l++) lut[l][lutWAddr] <= lutWData;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      outValid <= 1'b0;
      for (int l = 0; l < LANES; l++) outVals[l] <= '0;
    end else begin
      outValid <= inValid;
      if (inValid)
        for (int l = 0; l < LANES; l++) outVals[l] <= lut[l][inCodes[l]];
    end
  end

endmodule
