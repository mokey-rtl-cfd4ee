// tb_ot_pack -- self-checking test of the off-chip format packer.
// Feeds groups of 64 random codes (no outliers, a few, many) with random
// gaps, honouring inReady. Collects the value lines and the pointer
// fields the packer emits and compares them with the streams the
// testbench computes from the codes: 16 4-bit values per line, then per
// group the outlier count followed by the positions in order.
module tb_ot_pack;
  import mokey_pkg::*;
  localparam int NGROUPS = 30;

  logic clk = 0, rst_n = 0, inValid = 0, inReady, lineValid, ptrValid;
  code_t inCode = '0;
  logic [63:0] lineData;
  logic [5:0]  ptrData;
  int checks = 0, failures = 0;

  code_t vals [NGROUPS*64];
  int    ptrExp [$];
  logic [63:0] lineExp [$];
  int    sent = 0;

  ot_pack dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int g = 0; g < NGROUPS; g++) begin
      int n;
      n = 0;
      for (int i = 0; i < 64; i++) begin
        vals[g*64+i] = code_t'($urandom);
        vals[g*64+i].is_ot = (g % 3 == 0) ? 1'b0 : (g % 3 == 1) ? (($urandom % 16) == 0) : (($urandom % 3) == 0);
        if (vals[g*64+i].is_ot) n++;
      end
      ptrExp.push_back(n);
      for (int i = 0; i < 64; i++) if (vals[g*64+i].is_ot) ptrExp.push_back(i);
      for (int l = 0; l < 4; l++) begin
        logic [63:0] w;
        for (int j = 0; j < 16; j++) w[4*j +: 4] = {vals[g*64+l*16+j].sign, vals[g*64+l*16+j].idx};
        lineExp.push_back(w);
      end
    end
  end

  always @(negedge clk) begin
    inValid = rst_n && sent < NGROUPS*64 && ($urandom % 3 != 0);
    inCode  = (sent < NGROUPS*64) ? vals[sent] : '0;
  end

  always @(posedge clk) if (rst_n) begin
    if (inValid && inReady) sent++;
    if (lineValid) begin
      checks++;
      if (lineExp.size() == 0 || lineData != lineExp[0]) begin
        failures++;
        if (failures < 10) $display("line mismatch %h", lineData);
      end
      if (lineExp.size() > 0) void'(lineExp.pop_front());
    end
    if (ptrValid) begin
      checks++;
      if (ptrExp.size() == 0 || int'(ptrData) != ptrExp[0]) begin
        failures++;
        if (failures < 10) $display("ptr mismatch %0d want %0d", ptrData, ptrExp.size() ? ptrExp[0] : -1);
      end
      if (ptrExp.size() > 0) void'(ptrExp.pop_front());
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (sent == NGROUPS*64);
    repeat (80) @(posedge clk);
    checks++;
    if (ptrExp.size() != 0 || lineExp.size() != 0) begin
      failures++;
      $display("left over: %0d pointers %0d lines", ptrExp.size(), lineExp.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
