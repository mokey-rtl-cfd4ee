// out_quant -- Output activation quantizer.
//
// Maps a 16-bit fixed-point output activation (OA) to the code of its
// nearest centroid. The NUM_ENT centroids (the 16 G and 16 OT centroids of
// the output tensor) are held sorted in ascending order together with the
// 5-bit code each one stands for. NUM_ENT comparators form lt[i] = OA <
// cent[i], a run of 0s followed by 1s; a leading-one detector finds the
// first 1 at position h. Two muxes pick CH = cent[h] and CL = cent[h-1]
// (CL = CH when h = 0). The distances CH-OA and OA-CL are compared: Ci = 1
// when CH is strictly nearer, and the chosen position is Ci ? h : h-1. The
// position then selects the stored code. An OA not below any centroid maps
// to the last position. Ties go to the lower centroid.
//
// Interface: load centroids and codes through dWe/dWAddr/dWCent/dWCode
// (the table must be kept sorted by the loader); present OA with oaValid;
// the result appears on qValid/qCode/qPos one clock later.
//
// The comparator / leading-one / CL-CH / subtract-and-compare structure
// follows the paper's quantizer figure. The separate code table, the
// tie rule and the all-zero case are this design's choices.
module out_quant
  import mokey_pkg::*;
#(
  parameter int unsigned NUM_ENT = 32,
  parameter int unsigned DATA_W  = 16,
  localparam int unsigned PW     = $clog2(NUM_ENT)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     dWe,
  input  logic [PW-1:0]            dWAddr,
  input  logic signed [DATA_W-1:0] dWCent,
  input  code_t                    dWCode,
  input  logic                     oaValid,
  input  logic signed [DATA_W-1:0] oa,
  output logic                     qValid,
  output code_t                    qCode,
  output logic [PW-1:0]            qPos
);

  logic signed [DATA_W-1:0] cent [NUM_ENT];
  code_t                    codes [NUM_ENT];

  logic [NUM_ENT-1:0]       lt;
  logic                     anyOne, ci;
  logic [PW-1:0]            posH, posL, pos;
  logic signed [DATA_W-1:0] cH, cL;
  logic signed [DATA_W:0]   dH, dL;

  always_ff @(posedge clk) begin
    if (dWe) begin
      cent[dWAddr]  <= dWCent;
      codes[dWAddr] <= dWCode;
    end
  end

  always_comb begin
    for (int i = 0; i < NUM_ENT; i++) lt[i] = oa < cent[i];
    // leading-one detector: lowest index holding a 1
    anyOne = |lt;
    posH   = PW'(NUM_ENT - 1);
    for (int i = NUM_ENT - 1; i >= 0; i--) if (lt[i]) posH = PW'(i);
    posL = (posH == '0) ? '0 : posH - PW'(1);
    cH   = cent[posH];
    cL   = cent[posL];
    dH   = (DATA_W+1)'(cH) - (DATA_W+1)'(oa);
    dL   = (DATA_W+1)'(oa) - (DATA_W+1)'(cL);
    ci   = dH < dL;
    pos  = !anyOne ? PW'(NUM_ENT - 1) : (ci ? posH : posL);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qValid <= 1'b0;
      qCode  <= '0;
      qPos   <= '0;
    end else begin
      qValid <= oaValid;
      if (oaValid) begin
        qCode <= codes[pos];
        qPos  <= pos;
      end
    end
  end

endmodule
