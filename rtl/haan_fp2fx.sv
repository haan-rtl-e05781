// haan_fp2fx: FP2FX unit. Converts one element in FP32, FP16 or INT8 to a
// signed fixed-point number with OUT_FRAC fraction bits in OUT_W bits.
//
// How it works: for FP formats the hidden-one mantissa is shifted by
// (unbiased exponent - mantissa bits + OUT_FRAC); the magnitude is
// truncated (round toward zero) and then negated for a negative sign. Values
// whose magnitude does not fit, infinities and NaNs saturate; zeros and
// subnormals give 0. An INT8 element is already fixed point: it is only
// sign-extended and moved to the fraction position ("bypass" of the
// conversion, as the accelerator's statistics path describes it).
//
// Interface: fmt selects the input format (the "Precision" control);
// in_elem holds FP32 in [31:0], FP16 in [15:0] or INT8 in [7:0].
// Timing: purely combinational.
//
// The unit and its bypass follow the paper; rounding, subnormal and
// saturation behaviour are this design's own choices.
module haan_fp2fx
  import haan_pkg::*;
#(
  parameter int unsigned OUT_W    = FX_W,
  parameter int unsigned OUT_FRAC = FX_FRAC
) (
  input  fmt_e                     fmt,
  input  elem_t                    in_elem,
  output logic signed [OUT_W-1:0]  out_fx
);

  localparam logic [OUT_W-1:0] MAX_POS = {1'b0, {(OUT_W-1){1'b1}}};

  logic              sgn;
  logic [7:0]        ex;
  logic [23:0]       mant;      // hidden one included
  logic              is_zero, is_special;
  int                mbits, bias, ex_max, sh;
  logic [OUT_W-1:0]  mag;
  logic              sat;

  always_comb begin
    sgn        = 1'b0;
    ex         = '0;
    mant       = '0;
    mbits      = 23;
    bias       = 127;
    ex_max     = 255;
    if (fmt == FMT_FP16) begin
      sgn    = in_elem[15];
      ex     = {3'b000, in_elem[14:10]};
      mant   = {13'd0, 1'b1, in_elem[9:0]};
      mbits  = 10;
      bias   = 15;
      ex_max = 31;
    end else begin
      sgn    = in_elem[31];
      ex     = in_elem[30:23];
      mant   = {1'b1, in_elem[22:0]};
    end
    is_zero    = (ex == 8'd0);
    is_special = (int'(ex) == ex_max);
    sh         = int'(ex) - bias - mbits + int'(OUT_FRAC);
    mag        = '0;
    sat        = 1'b0;
    if (is_special) begin
      sat = 1'b1;
    end else if (!is_zero) begin
      if (sh >= 0) begin
        // MSB of the result sits at bit mbits + sh
        if (mbits + sh >= int'(OUT_W) - 1) sat = 1'b1;
        else mag = OUT_W'(mant) << sh;
      end else if (sh > -25) begin
        mag = OUT_W'(mant >> (-sh));
      end
    end

    if (fmt == FMT_INT8) begin
      out_fx = OUT_W'(signed'(in_elem[7:0])) <<< OUT_FRAC;
    end else if (sat) begin
      out_fx = (sgn && !(is_special && in_elem[22:0] != 0 && fmt == FMT_FP32)
                    && !(is_special && in_elem[9:0] != 0 && fmt == FMT_FP16))
               ? -signed'(MAX_POS) : signed'(MAX_POS);
    end else begin
      out_fx = sgn ? -signed'(mag) : signed'(mag);
    end
  end

endmodule
