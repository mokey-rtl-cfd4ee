// tb_ot_unpack -- self-checking test of the off-chip format expander.
// Builds random groups of 64 4-bit values with random outlier sets (none,
// a few, many), encodes them as the value-line stream and the
// count-then-positions pointer stream, and drives both with random gaps
// and random output back-pressure. Every emitted 16-code line is compared
// with the codes the testbench started from.
module tb_ot_unpack;
  import mokey_pkg::*;
  localparam int NGROUPS = 40;

  logic clk = 0, rst_n = 0;
  logic ptrValid = 0, ptrReady, lineValid = 0, lineReady, outValid, outReady = 0;
  logic [5:0] ptrData = '0;
  logic [63:0] lineData = '0;
  code_t outCodes [16];
  int checks = 0, failures = 0;

  code_t  vals [NGROUPS*64];
  int     ptrQ [$];
  logic [63:0] lineQ [$];
  int     outLine = 0;

  ot_unpack dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // build the streams
  initial begin
    for (int g = 0; g < NGROUPS; g++) begin
      int n;
      int mode;
      n = 0;
      mode = g % 4;
      for (int i = 0; i < 64; i++) begin
        vals[g*64+i] = code_t'($urandom);
        vals[g*64+i].is_ot = (mode == 0) ? 1'b0 :
                             (mode == 3) ? (($urandom % 2) == 0) : (($urandom % 20) == 0);
        if (vals[g*64+i].is_ot) n++;
      end
      ptrQ.push_back(n);
      for (int i = 0; i < 64; i++) if (vals[g*64+i].is_ot) ptrQ.push_back(i);
      for (int l = 0; l < 4; l++) begin
        logic [63:0] w;
        for (int j = 0; j < 16; j++) w[4*j +: 4] = {vals[g*64+l*16+j].sign, vals[g*64+l*16+j].idx};
        lineQ.push_back(w);
      end
    end
  end

  // pointer source
  always @(posedge clk) if (rst_n) begin
    if (ptrValid && ptrReady) void'(ptrQ.pop_front());
  end
  always @(negedge clk) begin
    ptrValid = rst_n && ptrQ.size() > 0 && ($urandom % 3 != 0);
    ptrData  = (ptrQ.size() > 0) ? 6'(ptrQ[0]) : '0;
    lineValid = rst_n && lineQ.size() > 0 && ($urandom % 3 != 0);
    lineData  = (lineQ.size() > 0) ? lineQ[0] : '0;
    outReady  = ($urandom % 4 != 0);
  end
  always @(posedge clk) if (rst_n) begin
    if (lineValid && lineReady) void'(lineQ.pop_front());
    if (outValid && outReady) begin
      for (int j = 0; j < 16; j++) begin
        checks++;
        if (outCodes[j] != vals[outLine*16+j]) begin
          failures++;
          if (failures < 10) $display("line %0d value %0d: got %b want %b", outLine, j, outCodes[j], vals[outLine*16+j]);
        end
      end
      outLine++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (outLine == NGROUPS*4);
    repeat (5) @(posedge clk);
    checks++;
    if (ptrQ.size() != 0 || lineQ.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
