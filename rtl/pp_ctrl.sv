// pp_ctrl -- Sequencer for one output tile of a Mokey tile.
//
// One operation computes NUM_GPE output activations, one per GPE:
//   INIT    NUM_GPE cycles. Accumulator line p is loaded with cnst[p], the
//           output's precomputed constant terms (SoA2 + SoW2 + PoM2..4 in
//           the paper's decomposition); all CRFs are cleared.
//   COMPUTE gEnb is high; the GPEs count and the OPP takes outlier pairs.
//           Left when the host raises computeDone (pairs presented in that
//           cycle still count).
//   PP      Serial post-processing: for each GPE p, every CRF line is put
//           on sData in the order SoI 0..14, SoA1 0..7, SoW1 0..7, PoM1,
//           and the OPP adds count x base to accumulator line p
//           (32 cycles per GPE).
//   QUANT   Accumulator line p is sent to the output quantizer (oaValid),
//           waiting while qReady is low; then the next GPE is processed.
//   DONE    done pulses for one cycle.
// An operation therefore takes NUM_GPE + compute + NUM_GPE*33 + 1 cycles
// when qReady stays high.
//
// The control signal names (gEnb, ppEnb, ppAddr, sumSel, ppPESel, addSel*,
// mulSel*, addCnst) are the paper's; it says post-processing is serial and
// done once per output, but gives no controller. Everything about the
// order and the timing here is this design's choice.
// mulSelA and mulSelB are constant outputs: because the tensor scales are
// folded into the per-line bases, this sequence always multiplies a count
// by a base and never needs the OPP's mulCnst or accumulator operands. They
// stay as outputs so that another sequence can drive the OPP's full set of
// selects.
module pp_ctrl
  import mokey_pkg::*;
#(
  parameter int unsigned NUM_GPE = 8,
  parameter int unsigned DATA_W  = 16,
  localparam int unsigned PW     = (NUM_GPE > 1) ? $clog2(NUM_GPE) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic                     computeDone,
  input  logic signed [DATA_W-1:0] cnst [NUM_GPE],
  input  logic                     qReady,
  output logic                     busy,
  output logic                     done,
  output logic                     gEnb,
  output logic                     crfClr,
  output logic                     ppEnb,
  output logic [PW-1:0]            ppPESel,
  output logic [3:0]               ppAddr,
  output sum_sel_e                 sumSel,
  output logic                     addSelA,
  output logic                     addSelB,
  output logic                     mulSelA,
  output mulb_sel_e                mulSelB,
  output logic signed [DATA_W-1:0] addCnst,
  output logic [PW-1:0]            accRdAddr,
  output logic                     oaValid
);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_COMPUTE, S_PP, S_QUANT, S_DONE} state_e;
  state_e        state;
  logic [PW-1:0] pe;
  logic [3:0]    addr;
  sum_sel_e      ssel;
  logic          lastPe, lastLine;

  assign lastPe   = (pe == PW'(NUM_GPE - 1));
  assign lastLine = (32'(addr) == sum_depth(ssel) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pe    <= '0;
      addr  <= '0;
      ssel  <= SUM_SOI;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state <= S_INIT;
          pe    <= '0;
        end
        S_INIT: begin
          pe <= pe + 1'b1;
          if (lastPe) state <= S_COMPUTE;
        end
        S_COMPUTE: if (computeDone) begin
          state <= S_PP;
          pe    <= '0;
          addr  <= '0;
          ssel  <= SUM_SOI;
        end
        S_PP: begin
          if (lastLine) begin
            addr <= '0;
            if (ssel == SUM_POM1) begin
              state <= S_QUANT;
              ssel  <= SUM_SOI;
            end else begin
              ssel <= sum_sel_e'(ssel + 2'd1);
            end
          end else begin
            addr <= addr + 1'b1;
          end
        end
        S_QUANT: if (qReady) begin
          pe    <= pe + 1'b1;
          state <= lastPe ? S_DONE : S_PP;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    done      = (state == S_DONE);
    gEnb      = (state == S_COMPUTE);
    crfClr    = (state == S_INIT);
    ppEnb     = (state == S_INIT) || (state == S_PP);
    ppPESel   = pe;
    ppAddr    = addr;
    sumSel    = ssel;
    addSelA   = (state == S_INIT);
    addSelB   = (state == S_INIT);
    mulSelA   = 1'b0;
    mulSelB   = MULB_SDATA;
    addCnst   = cnst[pe];
    accRdAddr = pe;
    oaValid   = (state == S_QUANT) && qReady;
  end

endmodule
