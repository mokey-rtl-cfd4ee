// tb_out_quant -- self-checking test of the output quantizer.
// Loads 32 distinct centroids in ascending order with random codes, then
// quantizes random activations (inside, below and above the centroid range,
// and exactly on centroids and midpoints). The reference is a brute-force
// nearest-centroid search (ties to the lower centroid). Checks the position,
// the code and the one-cycle latency.
module tb_out_quant;
  import mokey_pkg::*;
  localparam int unsigned NUM_ENT = 32;
  localparam int unsigned DATA_W  = 16;

  logic clk = 0, rst_n = 0, dWe = 0, oaValid = 0, qValid;
  logic [4:0] dWAddr = '0, qPos;
  logic signed [DATA_W-1:0] dWCent = '0, oa = '0;
  code_t dWCode = '0, qCode;
  int checks = 0, failures = 0;
  int cent [NUM_ENT];
  code_t codes [NUM_ENT];

  out_quant #(.NUM_ENT(NUM_ENT), .DATA_W(DATA_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int nearest(int v);
    int best = 0;
    for (int i = 1; i < NUM_ENT; i++) begin
      int di = (v > cent[i]) ? v - cent[i] : cent[i] - v;
      int db = (v > cent[best]) ? v - cent[best] : cent[best] - v;
      if (di < db) best = i;
    end
    return best;
  endfunction

  initial begin
    int v, want, k;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      // sorted distinct centroids spread over part of the 16-bit range
      v = -20000 + int'($urandom % 2000);
      for (int i = 0; i < NUM_ENT; i++) begin
        cent[i]  = v;
        codes[i] = code_t'($urandom);
        v += 1 + int'($urandom % (round == 0 ? 3 : 1200));
      end
      for (int i = 0; i < NUM_ENT; i++) begin
        @(negedge clk);
        dWe = 1; dWAddr = 5'(i); dWCent = DATA_W'(cent[i]); dWCode = codes[i];
      end
      @(negedge clk) dWe = 0;
      for (int t = 0; t < 800; t++) begin
        case (t % 4)
          0: v = cent[$urandom % NUM_ENT];
          1: begin k = $urandom % (NUM_ENT - 1); v = (cent[k] + cent[k+1]) / 2; end
          2: v = cent[0] - 50 + int'($urandom % (cent[NUM_ENT-1] - cent[0] + 100));
          default: v = int'($signed(16'($urandom)));
        endcase
        want = nearest(v);
        @(negedge clk);
        oaValid = 1; oa = DATA_W'(v);
        @(posedge clk); #1;
        oaValid = 0;
        checks++;
        if (!qValid || qPos != 5'(want) || qCode != codes[want]) begin
          failures++;
          if (failures < 10) $display("oa=%0d pos=%0d want %0d valid=%0b", v, qPos, want, qValid);
        end
        @(posedge clk); #1;
        checks++;
        if (qValid) failures++;   // a single-cycle valid
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
