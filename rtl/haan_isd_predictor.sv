// haan_isd_predictor: ISD predictor for the skipped normalization layers.
//
// In the later layers of an LLM, log(ISD) falls almost linearly with the
// layer index. For a skip range (i, j) found offline, the ISD of a layer k
// with i < k <= j is therefore not computed but predicted from the ISD the
// same token had at layer i:
//     log2(ISD_k) = log2(ISD_i) + e * (k - i).
// How it works: the bit pattern of a positive FP32 number, divided by 2^23,
// is log2 of the number plus a constant offset (to within a small piecewise
// linear error). The prediction is therefore one multiply and one add on
// bit patterns: bits_k = bits_i + e * (k - i) * 2^23. With e in signed Q8.23
// (log2 units per layer), e * (k - i) is already in bit-pattern units.
// The anchor table keeps one FP32 ISD of layer i per token position.
//
// Interface:
//   skip_en, skip_i, skip_j, layer: the skip range and the current layer;
//     anchor_layer = (layer == i), skip_layer = (i < layer <= j), both
//     combinational, tell the controller whether to store or to predict.
//   wr_en/wr_token/wr_isd: store the ISD (FP32) a token had at layer i.
//   rd_en/rd_token: request the prediction for a token at layer k;
//     pred_valid/pred_isd follow one cycle later. A read and a write of the
//     same token in one cycle return the old anchor.
// A result below zero clamps to +0, one at or above the FP32 infinity
// pattern to the largest finite number.
//
// The prediction rule and the skip range (i, j) with layer i computed
// follow the paper. The paper performs the log-domain arithmetic with a
// vendor floating-point core; this design uses the bit-pattern logarithm the
// paper already relies on in the square root inverter. The per-token table
// and the number formats are this design's own.
module haan_isd_predictor #(
  parameter int unsigned MAX_SEQ = 2048,
  parameter int unsigned LAYER_W = 8,
  localparam int unsigned TOK_W  = (MAX_SEQ > 1) ? $clog2(MAX_SEQ) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               skip_en,
  input  logic [LAYER_W-1:0] skip_i,
  input  logic [LAYER_W-1:0] skip_j,
  input  logic [LAYER_W-1:0] layer,
  input  logic signed [31:0] decay,
  output logic               anchor_layer,
  output logic               skip_layer,
  input  logic               wr_en,
  input  logic [TOK_W-1:0]   wr_token,
  input  logic [31:0]        wr_isd,
  input  logic               rd_en,
  input  logic [TOK_W-1:0]   rd_token,
  output logic               pred_valid,
  output logic [31:0]        pred_isd
);

  logic [31:0] anchor [MAX_SEQ];

  assign anchor_layer = skip_en && (layer == skip_i);
  assign skip_layer   = skip_en && (layer > skip_i) && (layer <= skip_j);

  logic signed [LAYER_W:0]         dk;
  logic signed [32+LAYER_W:0]      delta;
  logic signed [33+LAYER_W:0]      sum;
  logic [31:0]                     pred_d;

  always_comb begin
    dk    = signed'({1'b0, layer}) - signed'({1'b0, skip_i});
    delta = (33+LAYER_W)'(decay) * (33+LAYER_W)'(dk);
    sum   = (34+LAYER_W)'(signed'({1'b0, anchor[rd_token]})) + (34+LAYER_W)'(delta);
    if (sum < 0)                                pred_d = 32'h0000_0000;
    else if (sum >= (34+LAYER_W)'(32'h7F80_0000)) pred_d = 32'h7F7F_FFFF;
    else                                        pred_d = 32'(sum);
  end

  always_ff @(posedge clk) begin
    if (wr_en) anchor[wr_token] <= wr_isd;
    if (rd_en) pred_isd <= pred_d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pred_valid <= 1'b0;
    else        pred_valid <= rd_en;
  end

endmodule
