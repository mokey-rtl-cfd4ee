// tb_pp_ctrl -- self-checking test of the tile sequencer.
// Walks the controller through several operations with different compute
// lengths and random qReady stalls, checking the control outputs cycle by
// cycle against the expected schedule: NUM_GPE constant-load cycles, the
// compute window, then per GPE the scan SoI 0..14, SoA1 0..7, SoW1 0..7,
// PoM1 and one quantize cycle, then done. With qReady held high the
// operation must take NUM_GPE + compute + NUM_GPE*33 + 1 cycles.
module tb_pp_ctrl;
  import mokey_pkg::*;
  localparam int unsigned NUM_GPE = 8;
  localparam int unsigned DATA_W  = 16;

  logic clk = 0, rst_n = 0, start = 0, computeDone = 0, qReady = 1;
  logic signed [DATA_W-1:0] cnst [NUM_GPE];
  logic busy, done, gEnb, crfClr, ppEnb, addSelA, addSelB, mulSelA, oaValid;
  logic [2:0] ppPESel, accRdAddr;
  logic [3:0] ppAddr;
  sum_sel_e sumSel;
  mulb_sel_e mulSelB;
  logic signed [DATA_W-1:0] addCnst;
  int checks = 0, failures = 0;
  int nStall = 0;

  pp_ctrl #(.NUM_GPE(NUM_GPE), .DATA_W(DATA_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  // one cycle: outputs are sampled before the rising edge
  task automatic step();
    @(posedge clk); #1;
  endtask

  task automatic run_op(input int compute, input bit stalls, output int cycles);
    cycles = 0;
    start = 1; step(); start = 0; cycles++;   // IDLE -> INIT
    for (int p = 0; p < NUM_GPE; p++) begin
      chk(busy && crfClr && ppEnb && addSelA && addSelB && !gEnb && ppPESel == 3'(p)
          && addCnst == cnst[p], $sformatf("init %0d", p));
      step(); cycles++;
    end
    for (int c = 0; c < compute; c++) begin
      chk(gEnb && !ppEnb && !crfClr, "compute");
      computeDone = (c == compute - 1);
      step(); cycles++;
      computeDone = 0;
    end
    for (int p = 0; p < NUM_GPE; p++) begin
      for (int s = 0; s < 4; s++) begin
        int depth;
        depth = (s == 0) ? 15 : (s == 3) ? 1 : 8;
        for (int a = 0; a < depth; a++) begin
          chk(ppEnb && !gEnb && !addSelA && !addSelB && !mulSelA && mulSelB == MULB_SDATA
              && ppPESel == 3'(p) && sumSel == sum_sel_e'(s) && ppAddr == 4'(a) && !oaValid,
              $sformatf("pp pe %0d sum %0d line %0d", p, s, a));
          step(); cycles++;
        end
      end
      // quantize, possibly stalled
      if (stalls) begin
        int n;
        n = $urandom % 4;
        qReady = 0; #1;
        for (int k = 0; k < n; k++) begin
          chk(!oaValid && !ppEnb && accRdAddr == 3'(p), "stall");
          nStall++;
          step(); cycles++;
        end
        qReady = 1; #1;
      end
      chk(oaValid && !ppEnb && accRdAddr == 3'(p), $sformatf("quant %0d", p));
      step(); cycles++;
    end
    chk(done && busy, "done");
    step(); cycles++;
    chk(!busy && !done, "idle");
  endtask

  initial begin
    int cyc;
    foreach (cnst[i]) cnst[i] = DATA_W'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    step();
    chk(!busy, "idle after reset");
    run_op(5, 0, cyc);
    // cycles counted from the start edge to the edge that leaves DONE
    chk(cyc == 1 + NUM_GPE + 5 + NUM_GPE * 33 + 1,
        $sformatf("cycle count %0d", cyc));
    run_op(1, 1, cyc);
    foreach (cnst[i]) cnst[i] = DATA_W'($urandom);
    run_op(37, 1, cyc);
    chk(nStall > 0, "stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
