// ot_pack -- On-chip 5-bit codes to the off-chip format.
//
// Takes one code per transfer (inValid/inReady). The 4-bit part {sign, idx}
// is collected into a 64-bit line, value j of a line in bits 4j+3:4j; every
// 16th value the full line is sent on lineValid/lineData. The position
// (0..63) of every outlier in the current group of 64 values is kept in a
// small list. After the 64th value the unit drops inReady and sends the
// group's pointer list on ptrValid/ptrData, one 6-bit field per cycle: the
// outlier count, then the positions in increasing order. It then accepts
// the next group. The output streams have no back-pressure.
//
// The format follows the paper's DRAM figure and its remark that a
// controller packs quantized outputs into it. Groups holding 64 outliers
// cannot be expressed with a 6-bit count; an assertion flags them. The
// handshake and the stall while the pointer list drains are this design's
// choices.
module ot_pack
  import mokey_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   inValid,
  input  code_t                  inCode,
  output logic                   inReady,
  output logic                   lineValid,
  output logic [4*LINE_VALS-1:0] lineData,
  output logic                   ptrValid,
  output logic [PTR_W-1:0]       ptrData
);

  typedef enum logic {S_COLLECT, S_PTR} state_e;
  state_e                 state;
  logic [PTR_W-1:0]       pos;       // position inside the group
  logic [PTR_W:0]         nOt;       // outliers in this group
  logic [PTR_W-1:0]       posList [GROUP_VALS];
  logic [PTR_W:0]         sent;      // pointer fields sent (0 = count)
  logic [4*LINE_VALS-1:0] lineBuf;

  assign inReady = (state == S_COLLECT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_COLLECT;
      pos       <= '0;
      nOt       <= '0;
      sent      <= '0;
      lineBuf   <= '0;
      lineValid <= 1'b0;
      lineData  <= '0;
      ptrValid  <= 1'b0;
      ptrData   <= '0;
      for (int i = 0; i < GROUP_VALS; i++) posList[i] <= '0;
    end else begin
      lineValid <= 1'b0;
      ptrValid  <= 1'b0;
      case (state)
        S_COLLECT: if (inValid) begin
          lineBuf[4*pos[3:0] +: 4] <= {inCode.sign, inCode.idx};
          if (inCode.is_ot) begin
            posList[nOt[PTR_W-1:0]] <= pos;
            nOt <= nOt + 1'b1;
          end
          if (pos[3:0] == 4'hF) begin
            lineValid <= 1'b1;
            lineData  <= lineBuf;
            lineData[4*15 +: 4] <= {inCode.sign, inCode.idx};
          end
          pos <= pos + 1'b1;
          if (pos == PTR_W'(GROUP_VALS - 1)) begin
            state <= S_PTR;
            sent  <= '0;
          end
        end
        default: begin
          ptrValid <= 1'b1;
          if (sent == '0) ptrData <= nOt[PTR_W-1:0];
          else            ptrData <= posList[sent[PTR_W-1:0] - 1'b1];
          sent <= sent + 1'b1;
          if (sent == nOt) begin
            state <= S_COLLECT;
            nOt   <= '0;
          end
        end
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   !(state == S_PTR && nOt[PTR_W]))
    else $error("ot_pack: 64 outliers in one group do not fit the 6-bit count");

endmodule
