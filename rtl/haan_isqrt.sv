// haan_isqrt: square root inverter. Computes ISD = 1/sqrt(x) for the
// variance x delivered by the statistics calculator.
//
// How it works, in three pipeline stages:
//   1. x is converted to FP32 (FX2FP). Read as an integer, an FP32 bit
//      pattern is close to a scaled, offset log2 of the value, so halving it
//      and subtracting from 0x5F3759DF gives the pattern of an approximate
//      1/sqrt(x) (the "fast inverse square root" initial guess y0). y0 is
//      converted back to fixed point (FP2FX, Q24.23).
//   2. t = (x/2) * y0 * y0, in fixed point.
//   3. One Newton-Raphson step on f(y) = 1/y^2 - x:
//      y1 = y0 * (1.5 - t), with 1.5 = 0x00C00000 in Q.23.
//   The result is saturated to the Q24.23 range.
// The single Newton step leaves a relative error below about 0.2 %.
//
// Interface: variance in Q33.46 (non-negative) with in_valid; isd in Q24.23
// with out_valid, three cycles after in_valid. Fully pipelined: one new
// operand per cycle.
//
// The stages and constants follow the paper's description. The paper's
// drawing labels the two halving shifts "<<1", while its equation halves;
// this design halves. The split into three register stages is this design's
// own.
module haan_isqrt
  import haan_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  sq_t  variance,
  output logic out_valid,
  output fx_t  isd
);

  localparam int unsigned P1_W = SQ_W + FX_W;       // x * y0
  localparam int unsigned P2_W = 2 * FX_W;          // (x y0 / 2) * y0
  localparam logic signed [P2_W-1:0] FX_MAXV = P2_W'({1'b0, {(FX_W-1){1'b1}}});

  // ---------------- Stage 1: initial guess --------------------------------
  elem_t x_fp;
  logic [31:0] y0_bits;
  fx_t   y0_fx;

  haan_fx2fp #(.IN_W(SQ_W), .IN_FRAC(SQ_FRAC)) u_fx2fp (
    .fmt(FMT_FP32), .in_fx(variance), .out_elem(x_fp));
  assign y0_bits = ISQRT_MAGIC - (x_fp >> 1);
  haan_fp2fx #(.OUT_W(FX_W), .OUT_FRAC(FX_FRAC)) u_fp2fx (
    .fmt(FMT_FP32), .in_elem(y0_bits), .out_fx(y0_fx));

  logic v1, v2, v3;
  sq_t  x1;
  fx_t  y0_1, y0_2, t2;

  // ---------------- Stage 2: t = (x/2) y0^2 --------------------------------
  logic signed [P1_W-1:0] p1;
  logic signed [P2_W-1:0] p2;
  fx_t                    hxy;
  always_comb begin
    p1  = P1_W'(x1 >>> 1) * P1_W'(y0_1);       // Q.69
    hxy = fx_t'(p1 >>> SQ_FRAC);               // Q.23, about sqrt(x)/2
    p2  = P2_W'(hxy) * P2_W'(y0_1);            // Q.46
  end

  // ---------------- Stage 3: y1 = y0 (1.5 - t) -----------------------------
  logic signed [P2_W-1:0] p3, y1;
  always_comb begin
    p3 = P2_W'(y0_2) * P2_W'(NEWTON_1P5 - t2);  // Q.46
    y1 = p3 >>> FX_FRAC;
    if (y1 > FX_MAXV)  y1 = FX_MAXV;
    if (y1 < 0)        y1 = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
      v3 <= 1'b0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      v3 <= v2;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      x1   <= variance;
      y0_1 <= y0_fx;
    end
    if (v1) begin
      y0_2 <= y0_1;
      t2   <= fx_t'(p2 >>> FX_FRAC);
    end
    if (v2) begin
      isd  <= fx_t'(y1);
    end
  end

  assign out_valid = v3;

endmodule
