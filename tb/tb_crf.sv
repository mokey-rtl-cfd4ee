// tb_crf -- self-checking test of the counter register file.
// Drives random increments/decrements, clears and reads against a
// reference array of counters kept in the testbench; checks every line
// after every cycle, including 8-bit wrap-around.
module tb_crf;
  localparam int unsigned DEPTH = 15;
  localparam int unsigned CNT_W = 8;
  localparam int unsigned AW = 4;

  logic clk = 0, rst_n = 0, clr = 0, wEn = 0, upDown = 0;
  logic [AW-1:0] wAddr = '0, rAddr = '0;
  logic signed [CNT_W-1:0] rData;
  int checks = 0, failures = 0;
  int ref_cnt [DEPTH];

  crf #(.DEPTH(DEPTH), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int i = 0; i < DEPTH; i++) begin
      rAddr = AW'(i);
      #1;
      checks++;
      if (rData !== CNT_W'(ref_cnt[i])) begin
        failures++;
        if (failures < 10) $display("line %0d: got %0d want %0d", i, rData, CNT_W'(ref_cnt[i]));
      end
    end
  endtask

  initial begin
    foreach (ref_cnt[i]) ref_cnt[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      wEn    = ($urandom % 4) != 0;
      upDown = ($urandom % 3) != 0;   // biased up so counters wrap
      wAddr  = AW'($urandom % DEPTH);
      clr    = ($urandom % 500) == 0;
      @(posedge clk);
      #1;
      if (clr) foreach (ref_cnt[i]) ref_cnt[i] = 0;
      else if (wEn) ref_cnt[wAddr] += upDown ? 1 : -1;
      clr = 0; wEn = 0;
      if (t % 10 == 0) check_all();
    end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
