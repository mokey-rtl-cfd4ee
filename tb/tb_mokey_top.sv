// tb_mokey_top -- end-to-end test of a Mokey tile at its default size.
//
// Builds activation and weight dictionaries the way the method does: the
// Gaussian centroids lie on theta*(a^int + b)*s + m with a = 1.179 and
// b = -0.977, the outlier centroids further out; all are 16-bit fixed point
// with FRAC fractional bits. The OPP bases (s_A*s_W*a^k, s_A*s_W*b*a^k,
// s_A*s_W*b^2) and the per-output constants are computed here in real
// arithmetic and rounded. Then it runs one operation per entry of LENS;
// each gives every GPE its own random stream of (activation, weight)
// codes, about 8 % of them outliers.
//
// Checks per output:
//  * bit-exact: the 16-bit output equals a model of the tile's arithmetic
//    (8-bit wrapping counters, floor shift, 16-bit saturation);
//  * meaning: when nothing wrapped or saturated, the output is within the
//    rounding bound of the real dot product sum(A_i*W_i) of the centroid
//    values, i.e. counting indexes really replaces the multiplications;
//  * the quantized code is the nearest output centroid;
//  * the compute phase lasts max over lanes of (pairs + holds) + 1 cycles
//    (one pair per lane per cycle) and post-processing NUM_GPE*33 cycles.
// The packer's off-chip streams are looped back into the unpacker and
// must give back the quantized codes; the recovered codes are expanded by
// the decompression engine and must give the output centroids.
// Then 64 values from outside the tile (the compression-only use) are fed
// to the quantizer through extOa; their codes take the same checked path,
// and the input must be stalled while the packer sends a pointer list.
// Mechanisms counted (each must occur): outlier MAC, hold of a lane by the
// outlier chain, Gaussian count, post-processing, quantization, packed
// line, non-empty outlier pointer list, unpacked outlier code,
// decompressed line, external value quantized, external input stalled.
module tb_mokey_top;
  import mokey_pkg::*;
  localparam int NUM_GPE = 8;
  localparam int FRAC    = 8;
  localparam int OPS     = 8;    // 8 ops x 8 outputs = one 64-value group
  localparam int EXT     = 64;   // values quantized for another accelerator
  localparam real A_FIT  = 1.179;
  localparam real B_FIT  = -0.977;

  logic clk = 0, rst_n = 0, start = 0, computeDone = 0, busy, done;
  logic [3:0] frac = 4'(FRAC);
  logic signed [15:0] cnst [NUM_GPE];
  logic signed [15:0] mulCnst = '0;
  logic [NUM_GPE-1:0] laneValid = '0, hldA, hldW;
  logic laneEn;
  code_t aCode [NUM_GPE], wCode [NUM_GPE];
  logic lutWe = 0;
  logic [6:0] lutWAddr = '0;
  logic signed [15:0] lutWData = '0;
  logic qdWe = 0;
  logic [4:0] qdWAddr = '0, qPos;
  logic signed [15:0] qdWCent = '0;
  code_t qdWCode = '0;
  logic oaValid, qValid;
  logic signed [15:0] oaData;
  code_t qCode;
  logic extOaValid = 0, extOaReady;
  logic signed [15:0] extOa = '0;
  logic stLineValid, stPtrValid;
  logic [63:0] stLineData;
  logic [5:0] stPtrData;
  logic ldPtrValid = 0, ldPtrReady, ldLineValid = 0, ldLineReady, ldValid, ldReady = 1;
  logic [5:0] ldPtrData = '0;
  logic [63:0] ldLineData = '0;
  code_t ldCodes [16];
  logic decLutWe = 0, decInValid = 0, decOutValid;
  logic [4:0] decLutWAddr = '0;
  logic [15:0] decLutWData = '0;
  code_t decInCodes [16];
  logic [15:0] decOutVals [16];

  mokey_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int nOtlMac = 0, nHold = 0, nGCount = 0, nPp = 0, nQuant = 0, nLine = 0,
      nPtrList = 0, nUnpackOt = 0, nDec = 0, nExact = 0, nExt = 0, nExtStall = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- dictionaries ----------------
  real sA = 0.55, mA = 0.08, sW = 0.42, mW = -0.03, sO = 0.9, mO = 0.05;
  real valA [32], valW [32];        // real centroid per code
  int  fxA [32], fxW [32];          // fixed-point centroid per code
  int  base [64];                   // OPP bases by {sumSel, ppAddr}
  int  qCent [32];                  // output centroids, ascending
  code_t qCodeTab [32];

  function automatic real apow(int k);
    real r;
    r = 1.0;
    for (int i = 0; i < k; i++) r = r * A_FIT;
    return r;
  endfunction

  function automatic int fx(real x);
    real y;
    int v;
    y = x * (2.0 ** FRAC);
    v = (y >= 0) ? int'($floor(y + 0.5)) : -int'($floor(-y + 0.5));
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return v;
  endfunction

  // centroid of a 5-bit code for a tensor with scale s and mean m
  function automatic real centroid(code_t c, real s, real m);
    real th;
    th = c.sign ? -1.0 : 1.0;
    if (!c.is_ot) return th * (apow(int'(c.idx)) + B_FIT) * s + m;
    return th * (2.6 + 0.45 * real'(c.idx)) * s + m;
  endfunction

  task automatic load_luts();
    code_t c, tc;
    real v [32];
    real tv;
    code_t cs [32];
    for (int i = 0; i < 32; i++) begin
      c = code_t'(i);
      valA[i] = centroid(c, sA, mA); fxA[i] = fx(valA[i]);
      valW[i] = centroid(c, sW, mW); fxW[i] = fx(valW[i]);
    end
    for (int i = 0; i < 64; i++) base[i] = 0;
    for (int k = 0; k < 15; k++) base[{2'(SUM_SOI), 4'(k)}] = fx(sA * sW * apow(k));
    for (int k = 0; k < 8; k++) begin
      base[{2'(SUM_SOA1), 4'(k)}] = fx(sA * sW * B_FIT * apow(k));
      base[{2'(SUM_SOW1), 4'(k)}] = fx(sA * sW * B_FIT * apow(k));
    end
    base[{2'(SUM_POM1), 4'd0}] = fx(sA * sW * B_FIT * B_FIT);
    for (int i = 0; i < 128; i++) begin
      @(negedge clk);
      lutWe = 1; lutWAddr = 7'(i);
      lutWData = (i < 32) ? 16'(fxA[i]) : (i < 64) ? 16'(fxW[i-32]) : 16'(base[i-64]);
    end
    @(negedge clk) lutWe = 0;
    // output dictionary, sorted ascending (insertion sort)
    for (int i = 0; i < 32; i++) begin
      cs[i] = code_t'(i);
      v[i]  = centroid(cs[i], sO, mO);
    end
    for (int i = 1; i < 32; i++)
      for (int j = i; j > 0; j--)
        if (v[j] < v[j-1]) begin
          tv = v[j]; v[j] = v[j-1]; v[j-1] = tv;
          tc = cs[j]; cs[j] = cs[j-1]; cs[j-1] = tc;
        end
    for (int i = 0; i < 32; i++) begin
      qCent[i] = fx(v[i]); qCodeTab[i] = cs[i];
      @(negedge clk);
      qdWe = 1; qdWAddr = 5'(i); qdWCent = 16'(qCent[i]); qdWCode = cs[i];
      decLutWe = 1; decLutWAddr = 5'(cs[i]); decLutWData = 16'(qCent[i]);
    end
    @(negedge clk);
    qdWe = 0; decLutWe = 0;
  endtask

  // ---------------- streams and reference model ----------------
  code_t qA [NUM_GPE][$];
  code_t qW [NUM_GPE][$];
  int    lenG [NUM_GPE];
  int    expOut [NUM_GPE];
  code_t expCode [$];          // quantized codes in output order
  int    holds [NUM_GPE];

  function automatic int sat16(longint v, ref bit s);
    if (v > 32767)  begin s = 1; return 32767; end
    if (v < -32768) begin s = 1; return -32768; end
    return int'(v);
  endfunction

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic real rabs(real v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic int nearest(int v);
    int best;
    best = 0;
    for (int i = 1; i < 32; i++)
      if (iabs(v - qCent[i]) < iabs(v - qCent[best])) best = i;
    return best;
  endfunction

  task automatic make_op(input int len);
    int soi [15];
    int soa [8];
    int sow [8];
    int pom, n, th;
    longint acc;
    real truth, gcnst, tol, ta, tw, d;
    bit s, wrapped;
    code_t ca, cw;
    for (int g = 0; g < NUM_GPE; g++) begin
      n = len - 3 * g + int'($urandom % 5);
      if (n < 1) n = 1;
      lenG[g] = n;
      foreach (soi[k]) soi[k] = 0;
      foreach (soa[k]) begin soa[k] = 0; sow[k] = 0; end
      pom = 0; truth = 0.0; gcnst = 0.0; tol = 1.5; s = 0; wrapped = 0;
      qA[g].delete(); qW[g].delete();
      for (int i = 0; i < n; i++) begin
        ca = code_t'($urandom); cw = code_t'($urandom);
        ca.is_ot = ($urandom % 100) < 8;
        cw.is_ot = ($urandom % 100) < 8;
        qA[g].push_back(ca); qW[g].push_back(cw);
        truth += valA[ca] * valW[cw];
        // constant terms over the Gaussian pairs, in real arithmetic
        if (!ca.is_ot && !cw.is_ot) begin
          ta = ca.sign ? -1.0 : 1.0;
          tw = cw.sign ? -1.0 : 1.0;
          gcnst += ta * sA * mW * (apow(int'(ca.idx)) + B_FIT)
                 + tw * sW * mA * (apow(int'(cw.idx)) + B_FIT) + mA * mW;
        end
      end
      cnst[g] = 16'(fx(gcnst));
      // bit-exact model, in the order the tile works
      acc = longint'(cnst[g]);
      for (int i = 0; i < n; i++) begin
        ca = qA[g][i]; cw = qW[g][i];
        if (ca.is_ot || cw.is_ot) begin
          acc = sat16(acc + ((longint'(fxA[ca]) * longint'(fxW[cw])) >>> FRAC), s);
          tol += 0.5 * (rabs(valA[ca]) + rabs(valW[cw])) + 1.5;
        end else begin
          th = (ca.sign == cw.sign) ? 1 : -1;
          soi[int'(ca.idx) + int'(cw.idx)] += th;
          soa[ca.idx] += th; sow[cw.idx] += th; pom += th;
        end
      end
      for (int k = 0; k < 15; k++) begin
        if (soi[k] != int'(byte'(soi[k]))) wrapped = 1;
        acc = sat16(acc + longint'(byte'(soi[k])) * base[{2'(SUM_SOI), 4'(k)}], s);
        tol += 0.5 * iabs(soi[k]);
      end
      for (int k = 0; k < 8; k++) begin
        if (soa[k] != int'(byte'(soa[k]))) wrapped = 1;
        acc = sat16(acc + longint'(byte'(soa[k])) * base[{2'(SUM_SOA1), 4'(k)}], s);
        tol += 0.5 * iabs(soa[k]);
      end
      for (int k = 0; k < 8; k++) begin
        if (sow[k] != int'(byte'(sow[k]))) wrapped = 1;
        acc = sat16(acc + longint'(byte'(sow[k])) * base[{2'(SUM_SOW1), 4'(k)}], s);
        tol += 0.5 * iabs(sow[k]);
      end
      if (pom != int'(byte'(pom))) wrapped = 1;
      acc = sat16(acc + longint'(byte'(pom)) * base[{2'(SUM_POM1), 4'd0}], s);
      tol += 0.5 * iabs(pom);
      expOut[g] = int'(acc);
      if (!s && !wrapped) begin
        d = real'(expOut[g]) - truth * (2.0 ** FRAC);
        nExact++;
        chk(rabs(d) <= tol,
            $sformatf("gpe %0d: model %0d vs real dot product %f (tol %f LSB)",
                      g, expOut[g], truth * (2.0 ** FRAC), tol));
      end
      expCode.push_back(qCodeTab[nearest(expOut[g])]);
    end
  endtask

  // ---------------- lane drivers ----------------
  always @(negedge clk) begin
    for (int g = 0; g < NUM_GPE; g++) begin
      laneValid[g] = laneEn && qA[g].size() > 0;
      aCode[g] = (qA[g].size() > 0) ? qA[g][0] : '0;
      wCode[g] = (qW[g].size() > 0) ? qW[g][0] : '0;
    end
  end
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < NUM_GPE; g++) begin
      if (laneValid[g] && laneEn) begin
        if (hldA[g]) begin holds[g]++; nHold++; end
        else begin
          if (aCode[g].is_ot || wCode[g].is_ot) nOtlMac++; else nGCount++;
          void'(qA[g].pop_front()); void'(qW[g].pop_front());
        end
      end
      if (hldA[g] != hldW[g]) failures++;
    end
  end

  // ---------------- output side ----------------
  int outIdx = 0;           // output activations seen in this op
  int codeIdx = 0;          // quantized codes seen overall
  code_t gotCode [$];
  always @(posedge clk) if (rst_n) begin
    if (oaValid) begin
      chk(oaData == 16'(expOut[outIdx]),
          $sformatf("output %0d: %0d want %0d", outIdx, oaData, expOut[outIdx]));
      outIdx++;
    end
    if (qValid) begin
      nQuant++;
      chk(qCode == expCode[codeIdx], $sformatf("code %0d", codeIdx));
      gotCode.push_back(qCode);
      codeIdx++;
    end
    if (dut.ppEnb && !dut.addSelA) nPp++;
  end

  // loop the packer's streams back into the unpacker
  logic [63:0] lineFifo [$];
  int          ptrFifo [$];
  int          ptrLeft = 0;
  always @(posedge clk) if (rst_n) begin
    if (stLineValid) begin lineFifo.push_back(stLineData); nLine++; end
    if (stPtrValid) begin
      ptrFifo.push_back(int'(stPtrData));
      if (ptrLeft == 0) begin
        if (stPtrData != 0) nPtrList++;
        ptrLeft = int'(stPtrData);
      end else ptrLeft--;
    end
    if (ldPtrValid && ldPtrReady) void'(ptrFifo.pop_front());
    if (ldLineValid && ldLineReady) void'(lineFifo.pop_front());
  end
  always @(negedge clk) begin
    ldPtrValid  = ptrFifo.size() > 0;
    ldPtrData   = (ptrFifo.size() > 0) ? 6'(ptrFifo[0]) : '0;
    ldLineValid = lineFifo.size() > 0;
    ldLineData  = (lineFifo.size() > 0) ? lineFifo[0] : '0;
  end
  int unpackIdx = 0;
  code_t decQ [$];
  always @(posedge clk) if (rst_n) begin
    decInValid <= 1'b0;
    if (ldValid && ldReady) begin
      for (int j = 0; j < 16; j++) begin
        chk(ldCodes[j] == gotCode[unpackIdx + j], $sformatf("unpacked code %0d", unpackIdx + j));
        if (ldCodes[j].is_ot) nUnpackOt++;
      end
      unpackIdx += 16;
      decInValid <= 1'b1;
      decInCodes <= ldCodes;
      for (int j = 0; j < 16; j++) decQ.push_back(ldCodes[j]);
    end
    if (decOutValid) begin
      nDec++;
      for (int j = 0; j < 16; j++) begin
        int pos;
        pos = 0;
        for (int i = 0; i < 32; i++) if (qCodeTab[i] == decQ[0]) pos = i;
        void'(decQ.pop_front());
        chk(decOutVals[j] == 16'(qCent[pos]), "decompressed value");
      end
    end
  end

  // ---------------- main ----------------
  int lens [OPS] = '{40, 12, 96, 200, 64, 300, 24, 150};
  initial begin
    int cCompute, cDone, expCompute;
    bit empty;
    foreach (decInCodes[j]) decInCodes[j] = '0;
    foreach (cnst[g]) cnst[g] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_luts();
    for (int op = 0; op < OPS; op++) begin
      make_op(lens[op]);
      foreach (holds[g]) holds[g] = 0;
      outIdx = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (!laneEn) @(negedge clk);
      // compute phase: one cycle per loop pass
      cCompute = 0;
      while (1) begin
        empty = 1;
        for (int g = 0; g < NUM_GPE; g++) if (qA[g].size() > 0) empty = 0;
        cCompute++;
        if (empty) begin
          computeDone = 1;
          @(negedge clk);
          computeDone = 0;
          break;
        end
        @(negedge clk);
      end
      expCompute = 0;
      for (int g = 0; g < NUM_GPE; g++)
        if (lenG[g] + holds[g] > expCompute) expCompute = lenG[g] + holds[g];
      chk(cCompute == expCompute + 1,
          $sformatf("compute took %0d cycles, want %0d", cCompute, expCompute + 1));
      cDone = 0;
      while (!done) begin @(negedge clk); cDone++; end
      chk(cDone == NUM_GPE * 33, $sformatf("post-processing took %0d cycles", cDone));
      chk(outIdx == NUM_GPE, "all outputs produced");
      @(negedge clk);
    end
    // compression-only use: values from outside go through the same
    // quantizer, packer, unpacker and decompression engine
    for (int i = 0; i < EXT; i++) begin
      int v;
      bit rdy;
      v = qCent[0] - 300 + int'($urandom % 32'(qCent[31] - qCent[0] + 600));
      expCode.push_back(qCodeTab[nearest(v)]);
      extOaValid = 1; extOa = 16'(v);
      while (1) begin
        rdy = extOaReady;
        @(negedge clk);
        if (rdy) break;
        nExtStall++;
      end
      nExt++;
      extOaValid = 0;
      if ($urandom % 4 == 0) @(negedge clk);
    end
    repeat (200) @(negedge clk);
    chk(codeIdx == OPS * NUM_GPE + EXT, "all codes");
    chk(unpackIdx == OPS * NUM_GPE + EXT, "all codes unpacked");
    $display("mechanisms: outlier MAC %0d, hold %0d, Gaussian count %0d, pp MAC %0d, quantized %0d, packed lines %0d, pointer lists %0d, unpacked outliers %0d, decompressed lines %0d, real-value checks %0d, external values quantized %0d, external stalls %0d",
             nOtlMac, nHold, nGCount, nPp, nQuant, nLine, nPtrList, nUnpackOt, nDec, nExact, nExt, nExtStall);
    chk(nOtlMac > 0, "outlier MAC happened");
    chk(nHold > 0, "hold happened");
    chk(nGCount > 0, "Gaussian counting happened");
    chk(nPp > 0, "post-processing happened");
    chk(nQuant > 0, "quantization happened");
    chk(nLine > 0, "packing happened");
    chk(nPtrList > 0, "outlier pointer list happened");
    chk(nUnpackOt > 0, "unpacked outlier happened");
    chk(nDec > 0, "decompression happened");
    chk(nExact > 0, "real-value comparison happened");
    chk(nExt > 0, "compression-only quantization happened");
    chk(nExtStall > 0, "external input stalled by the packer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
