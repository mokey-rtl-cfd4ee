// tb_gpe -- self-checking test of one Gaussian PE.
// Feeds random code pairs (some outliers) and keeps reference histograms of
// the SoI/SoA1/SoW1/PoM1 counts; checks the leading-one chain outputs
// (otlSel, hld, isOtlNxt, gated otlA/otlW) every cycle, then reads every
// CRF line through ppAddr/sumSel/sData.
module tb_gpe;
  import mokey_pkg::*;
  localparam int unsigned CNT_W = 8;

  logic clk = 0, rst_n = 0, gEnb = 0, clr = 0, isOtlPrv = 0;
  code_t codeA = '0, codeW = '0, otlA, otlW;
  logic hldA, hldW, isOtlNxt, otlSel;
  logic [3:0] ppAddr = '0;
  sum_sel_e sumSel = SUM_SOI;
  logic signed [CNT_W-1:0] sData;
  int checks = 0, failures = 0;
  int soi[15], soa[8], sow[8], pom;
  int nOtlSel = 0, nHold = 0;

  gpe #(.CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic read_all();
    for (int k = 0; k < 15; k++) begin
      sumSel = SUM_SOI; ppAddr = 4'(k); #1;
      chk(sData == CNT_W'(soi[k]), $sformatf("SoI[%0d]=%0d want %0d", k, sData, soi[k]));
    end
    for (int k = 0; k < 8; k++) begin
      sumSel = SUM_SOA1; ppAddr = 4'(k); #1;
      chk(sData == CNT_W'(soa[k]), $sformatf("SoA1[%0d]", k));
      sumSel = SUM_SOW1; #1;
      chk(sData == CNT_W'(sow[k]), $sformatf("SoW1[%0d]", k));
    end
    sumSel = SUM_POM1; ppAddr = 0; #1;
    chk(sData == CNT_W'(pom), "PoM1");
  endtask

  initial begin
    int th;
    bit cur;
    foreach (soi[i]) soi[i] = 0;
    foreach (soa[i]) begin soa[i] = 0; sow[i] = 0; end
    pom = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      gEnb     = ($urandom % 5) != 0;
      isOtlPrv = ($urandom % 4) == 0;
      codeA    = code_t'($urandom);
      codeW    = code_t'($urandom);
      codeA.is_ot = ($urandom % 8) == 0;
      codeW.is_ot = ($urandom % 8) == 0;
      #1;
      cur = gEnb && (codeA.is_ot || codeW.is_ot);
      chk(otlSel == (cur && !isOtlPrv), "otlSel");
      chk(hldA == (cur && isOtlPrv) && hldW == hldA, "hld");
      chk(isOtlNxt == (cur || isOtlPrv), "isOtlNxt");
      chk(otlA == ((cur && !isOtlPrv) ? codeA : code_t'(0)), "otlA");
      chk(otlW == ((cur && !isOtlPrv) ? codeW : code_t'(0)), "otlW");
      if (otlSel) nOtlSel++;
      if (hldA) nHold++;
      if (gEnb && !cur) begin
        th = (codeA.sign == codeW.sign) ? 1 : -1;
        soi[int'(codeA.idx) + int'(codeW.idx)] += th;
        soa[codeA.idx] += th;
        sow[codeW.idx] += th;
        pom += th;
      end
      @(posedge clk);
      #1 gEnb = 0;
      if (t % 250 == 249) read_all();
    end
    read_all();
    // clear
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    foreach (soi[i]) soi[i] = 0;
    foreach (soa[i]) begin soa[i] = 0; sow[i] = 0; end
    pom = 0;
    read_all();
    chk(nOtlSel > 0 && nHold > 0, "outlier select and hold both seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
