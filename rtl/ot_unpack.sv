// ot_unpack -- Off-chip format to on-chip 5-bit codes.
//
// Off chip a tensor is two streams. The value stream holds every value as a
// 4-bit index {sign, idx}, 16 per 64-bit line (value j in bits 4j+3:4j),
// four lines per group of 64 values. The pointer stream holds, per group, a
// 6-bit outlier count followed by that many 6-bit positions (0..63) of the
// group's outliers. This unit reads a group's pointers first, builds a
// 64-bit outlier mask, then converts each of the group's four lines into
// 16 codes {mask bit, sign, idx}.
//
// Streams use valid/ready: a word moves when valid and ready are both high.
// The output (outValid/outCodes, 16 codes) is a register stage that holds
// until outReady. A group with no outliers costs one pointer cycle; a group
// with k outliers costs 1+k pointer cycles before its four lines.
//
// The layout (4-bit indexes, groups of 64, count then 6-bit positions)
// follows the paper's DRAM figure. Packing values low-first inside a line
// and the one-field-per-transfer pointer stream are this design's choices.
module ot_unpack
  import mokey_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  ptrValid,
  input  logic [PTR_W-1:0]      ptrData,
  output logic                  ptrReady,
  input  logic                  lineValid,
  input  logic [4*LINE_VALS-1:0] lineData,
  output logic                  lineReady,
  output logic                  outValid,
  output code_t                 outCodes [LINE_VALS],
  input  logic                  outReady
);

  typedef enum logic [1:0] {S_CNT, S_POS, S_LINE} state_e;
  state_e                  state;
  logic [PTR_W-1:0]        remain;
  logic [GROUP_VALS-1:0]   mask;
  logic [1:0]              lineNo;

  assign ptrReady  = (state == S_CNT) || (state == S_POS);
  assign lineReady = (state == S_LINE) && (!outValid || outReady);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_CNT;
      remain   <= '0;
      mask     <= '0;
      lineNo   <= '0;
      outValid <= 1'b0;
      for (int j = 0; j < LINE_VALS; j++) outCodes[j] <= '0;
    end else begin
      if (outValid && outReady) outValid <= 1'b0;
      case (state)
        S_CNT: if (ptrValid) begin
          mask   <= '0;
          remain <= ptrData;
          lineNo <= '0;
          state  <= (ptrData == '0) ? S_LINE : S_POS;
        end
        S_POS: if (ptrValid) begin
          mask[ptrData] <= 1'b1;
          remain        <= remain - 1'b1;
          if (remain == PTR_W'(1)) state <= S_LINE;
        end
        default: if (lineValid && lineReady) begin
          for (int j = 0; j < LINE_VALS; j++) begin
            outCodes[j].is_ot <= mask[{lineNo, 4'(j)}];
            outCodes[j].sign  <= lineData[4*j+3];
            outCodes[j].idx   <= lineData[4*j +: 3];
          end
          outValid <= 1'b1;
          lineNo   <= lineNo + 1'b1;
          if (lineNo == 2'd3) state <= S_CNT;
        end
      endcase
    end
  end

endmodule
