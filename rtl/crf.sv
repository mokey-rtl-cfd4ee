// crf -- Counter Register-File.
//
// DEPTH lines of CNT_W-bit signed counters. Every cycle in which wEn is high
// the line addressed by wAddr is incremented (upDown = 1) or decremented
// (upDown = 0); counters wrap modulo 2^CNT_W. The read port (rAddr -> rData)
// is combinational and is used to scan the counts during post-processing.
// clr zeroes every line at the next clock edge and wins over wEn.
//
// The organisation (line addressed by wAddr, up/down control, separate read
// address) follows the paper's CRF figure. The synchronous clear, the reset
// value of zero and the wrap-around on overflow are this design's choices;
// the paper does not say how the counters are cleared between outputs.
module crf #(
  parameter int unsigned DEPTH = 15,
  parameter int unsigned CNT_W = 8,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    wEn,
  input  logic [AW-1:0]           wAddr,
  input  logic                    upDown,
  input  logic [AW-1:0]           rAddr,
  output logic signed [CNT_W-1:0] rData
);

  logic signed [CNT_W-1:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (clr) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (wEn && (32'(wAddr) < DEPTH)) begin
      if (upDown) mem[wAddr] <= mem[wAddr] + CNT_W'(1);
      else        mem[wAddr] <= mem[wAddr] - CNT_W'(1);
    end
  end

  assign rData = (32'(rAddr) < DEPTH) ? mem[rAddr] : '0;

endmodule
