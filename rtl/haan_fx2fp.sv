// haan_fx2fp: FX2FP unit. Converts a signed fixed-point number (IN_W bits,
// IN_FRAC fraction bits) to FP32 or FP16.
//
// How it works: the magnitude's leading one is found with a priority
// search; its position gives the exponent and the bits below it, truncated,
// give the mantissa (round toward zero). Magnitudes above the format's
// largest finite value saturate to it; those below the smallest normal
// number flush to zero, keeping the input's sign.
//
// Interface: fmt is FMT_FP32 or FMT_FP16 (any other code gives FP32);
// out_elem carries FP32 in [31:0] or FP16 in [15:0] with [31:16] zero.
// Timing: purely combinational.
//
// The unit is the paper's FX2FP box; rounding and range handling are this
// design's own choices.
module haan_fx2fp
  import haan_pkg::*;
#(
  parameter int unsigned IN_W    = SQ_W,
  parameter int unsigned IN_FRAC = SQ_FRAC
) (
  input  fmt_e                    fmt,
  input  logic signed [IN_W-1:0]  in_fx,
  output elem_t                   out_elem
);

  logic             sgn;
  logic [IN_W-1:0]  mag;
  int               msb, bias, mbits, ex_max, e_b;
  logic [IN_W-1:0]  norm;
  logic [22:0]      man;

  always_comb begin
    sgn = in_fx[IN_W-1];
    mag = sgn ? IN_W'(-in_fx) : IN_W'(in_fx);
    msb = -1;
    for (int i = 0; i < int'(IN_W); i++) begin
      if (mag[i]) msb = i;
    end
    if (fmt == FMT_FP16) begin
      bias = 15;  mbits = 10; ex_max = 31;
    end else begin
      bias = 127; mbits = 23; ex_max = 255;
    end
    e_b  = msb - int'(IN_FRAC) + bias;
    // put the leading one at bit IN_W-1, then take the bits below it
    norm = (msb >= 0) ? (mag << (int'(IN_W) - 1 - msb)) : '0;
    man  = 23'(norm[IN_W-2 -: 23] >> (23 - mbits));
    out_elem = '0;
    if (fmt == FMT_FP16) begin
      if (msb < 0 || e_b <= 0)      out_elem[15:0] = {sgn, 15'd0};
      else if (e_b >= ex_max)       out_elem[15:0] = {sgn, 5'h1E, 10'h3FF};
      else                          out_elem[15:0] = {sgn, 5'(e_b), man[9:0]};
    end else begin
      if (msb < 0 || e_b <= 0)      out_elem = {sgn, 31'd0};
      else if (e_b >= ex_max)       out_elem = {sgn, 8'hFE, 23'h7F_FFFF};
      else                          out_elem = {sgn, 8'(e_b), man};
    end
  end

endmodule
