// tb_decomp_engine -- self-checking test of the decompression engine.
// Loads a random 32-entry table, sends random code vectors with random
// gaps and checks each lane's value and the one-cycle latency.
module tb_decomp_engine;
  import mokey_pkg::*;
  localparam int unsigned LANES = 16;

  logic clk = 0, rst_n = 0, lutWe = 0, inValid = 0, outValid;
  logic [4:0] lutWAddr = '0;
  logic [15:0] lutWData = '0;
  code_t inCodes [LANES];
  logic [15:0] outVals [LANES];
  logic [15:0] tbl [32];
  code_t sentCodes [LANES];
  int checks = 0, failures = 0;

  decomp_engine #(.LANES(LANES), .DATA_W(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (inCodes[l]) inCodes[l] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < 32; i++) begin
        @(negedge clk);
        lutWe = 1; lutWAddr = 5'(i); lutWData = 16'($urandom); tbl[i] = lutWData;
      end
      @(negedge clk) lutWe = 0;
      for (int t = 0; t < 300; t++) begin
        @(negedge clk);
        inValid = ($urandom % 3) != 0;
        foreach (inCodes[l]) inCodes[l] = code_t'($urandom);
        sentCodes = inCodes;
        @(posedge clk); #1;
        checks++;
        if (outValid != inValid) failures++;
        if (inValid)
          foreach (outVals[l]) begin
            checks++;
            if (outVals[l] != tbl[sentCodes[l]]) failures++;
          end
        inValid = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
