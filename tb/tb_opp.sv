// tb_opp -- self-checking test of the outlier/post-processing unit.
// Loads the LUT with random 16-bit values, then applies a random mix of
// outlier MACs (one random GPE selected), post-processing MACs with every
// select combination, constant loads and idle cycles. A reference model of
// the accumulator (64-bit arithmetic, arithmetic shift by frac, saturation
// to 16 bits) is updated alongside; every accumulator line is read back
// after every operation.
module tb_opp;
  import mokey_pkg::*;
  localparam int unsigned NUM_GPE = 8;
  localparam int unsigned DATA_W  = 16;
  localparam int unsigned CNT_W   = 8;

  logic clk = 0, rst_n = 0;
  logic lutWe = 0;
  logic [6:0] lutWAddr = '0;
  logic signed [DATA_W-1:0] lutWData = '0;
  logic [NUM_GPE-1:0] otlSel = '0;
  code_t otlA [NUM_GPE], otlW [NUM_GPE];
  logic signed [CNT_W-1:0] sData [NUM_GPE];
  logic isOtl;
  logic ppEnb = 0;
  logic [2:0] ppPESel = '0, rAddr = '0;
  logic [3:0] ppAddr = '0, frac = '0;
  sum_sel_e sumSel = SUM_SOI;
  logic addSelA = 0, addSelB = 0, mulSelA = 0;
  mulb_sel_e mulSelB = MULB_SDATA;
  logic signed [DATA_W-1:0] addCnst = '0, mulCnst = '0, rData;

  int checks = 0, failures = 0;
  longint lutm [128];
  longint accm [NUM_GPE];
  int nOtl = 0, nPp = 0, nSat = 0;

  opp #(.NUM_GPE(NUM_GPE), .DATA_W(DATA_W), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat(longint v);
    if (v > 32767)  begin nSat++; return 32767;  end
    if (v < -32768) begin nSat++; return -32768; end
    return v;
  endfunction

  task automatic check_acc();
    for (int i = 0; i < NUM_GPE; i++) begin
      rAddr = 3'(i); #1;
      checks++;
      if (longint'(rData) != accm[i]) begin
        failures++;
        if (failures < 10) $display("acc[%0d]=%0d want %0d", i, rData, accm[i]);
      end
    end
  endtask

  initial begin
    int pe, op, sh;
    longint a, b, p;
    foreach (otlA[i]) begin otlA[i] = '0; otlW[i] = '0; sData[i] = '0; end
    foreach (accm[i]) accm[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load the LUT; small magnitudes most of the time so that sums do not
    // always saturate
    for (int i = 0; i < 128; i++) begin
      @(negedge clk);
      lutWe = 1; lutWAddr = 7'(i);
      lutWData = ($urandom % 4 == 0) ? DATA_W'($urandom) : DATA_W'($signed($urandom % 1024) - 512);
      lutm[i] = longint'(lutWData);
    end
    @(negedge clk) lutWe = 0;
    check_acc();
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      op = $urandom % 4;
      frac = 4'($urandom % 12);
      foreach (sData[i]) sData[i] = CNT_W'($urandom);
      otlSel = '0; ppEnb = 0;
      foreach (otlA[i]) begin otlA[i] = '0; otlW[i] = '0; end
      if (op == 0) begin
        // outlier MAC; the select inputs are randomised to show they are ignored
        pe = $urandom % NUM_GPE;
        otlSel[pe] = 1'b1;
        otlA[pe] = code_t'($urandom);
        otlW[pe] = code_t'($urandom);
        ppEnb = $urandom % 2;
        addSelA = $urandom % 2; addSelB = $urandom % 2; mulSelA = $urandom % 2;
        a = lutm[{2'b00, otlA[pe]}];
        b = lutm[{2'b01, otlW[pe]}];
        accm[pe] = sat(accm[pe] + ((a * b) >>> frac));
        nOtl++;
      end else if (op <= 2) begin
        ppEnb = 1;
        pe = $urandom % NUM_GPE;
        ppPESel = 3'(pe);
        ppAddr = 4'($urandom);
        sumSel = sum_sel_e'($urandom % 4);
        addSelA = ($urandom % 4) == 0;
        addSelB = ($urandom % 4) == 0;
        mulSelA = $urandom % 2;
        mulSelB = mulb_sel_e'($urandom % 3);
        addCnst = DATA_W'($signed($urandom % 4096) - 2048);
        mulCnst = DATA_W'($signed($urandom % 4096) - 2048);
        a = mulSelA ? longint'(mulCnst) : lutm[{1'b1, sumSel, ppAddr}];
        case (mulSelB)
          MULB_RD2: begin b = lutm[{2'b01, 5'd0}]; sh = frac; end
          MULB_ACC: begin b = accm[pe]; sh = frac; end
          default:  begin b = longint'(sData[pe]); sh = 0; end
        endcase
        p = (a * b) >>> sh;
        accm[pe] = sat((addSelA ? longint'(addCnst) : p) + (addSelB ? 0 : accm[pe]));
        nPp++;
      end
      @(posedge clk);
      #1;
      otlSel = '0; ppEnb = 0;
      check_acc();
    end
    checks++;
    if (nOtl == 0 || nPp == 0 || nSat == 0) begin
      failures++;
      $display("coverage: outlier %0d pp %0d saturation %0d", nOtl, nPp, nSat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
