// haan_norm_unit: one normalization lane. Turns an input element z into
//     s = alpha * (z - Mean) * ISD + beta
// or, with the affine step switched off, into (z - Mean) * ISD.
//
// How it works: a subtractor removes the mean, a multiplier scales by the
// inverse standard deviation (ISD), a second multiplier and an adder apply
// the affine parameters. A multiplexer (the Ctrl input) picks the affine or
// the plain normalized value; the FX2FP unit then converts it to FP32 or
// FP16. With out_fmt = FMT_INT8 (quantized output) the conversion is skipped
// and the value leaves as saturated Q8.23 fixed point. Intermediate products
// are truncated back to Q.23 and saturated to the 48-bit range. For RMSNorm
// the mean input is simply 0.
//
// Interface: z_fx, mean and isd in Q24.23; alpha, beta in Q8.23;
// affine_en = 1 selects the affine result. out_elem (FP32 in [31:0], FP16
// in [15:0], or Q8.23) and out_valid are registered: one cycle after
// in_valid.
//
// The datapath follows the paper's drawing of the unit; the mux encoding,
// number formats and the output register are this design's own.
module haan_norm_unit
  import haan_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fx_t   z_fx,
  input  fx_t   mean,
  input  fx_t   isd,
  input  prm_t  alpha,
  input  prm_t  beta,
  input  logic  affine_en,
  input  fmt_e  out_fmt,
  output logic  out_valid,
  output elem_t out_elem
);

  localparam int unsigned PW = 2 * FX_W + 2;
  localparam logic signed [PW-1:0] FX_MAXV  = PW'({1'b0, {(FX_W-1){1'b1}}});
  localparam logic signed [PW-1:0] PRM_MAXV = PW'({1'b0, {(PRM_W-1){1'b1}}});

  function automatic fx_t sat_fx(input logic signed [PW-1:0] v);
    if (v > FX_MAXV)       return fx_t'(FX_MAXV);
    else if (v < -FX_MAXV) return fx_t'(-FX_MAXV);
    else                   return fx_t'(v);
  endfunction

  logic signed [PW-1:0] d, prod_n, prod_a, sum_a, sel_w;
  fx_t   n_fx, a_fx, sel;
  elem_t fp_out, q_out;

  always_comb begin
    d      = PW'(z_fx) - PW'(mean);
    prod_n = (sat_fx(d) * PW'(isd)) >>> FX_FRAC;
    n_fx   = sat_fx(prod_n);
    prod_a = (PW'(n_fx) * PW'(alpha)) >>> FX_FRAC;
    a_fx   = sat_fx(prod_a);
    sum_a  = PW'(a_fx) + PW'(beta);
    sel    = affine_en ? sat_fx(sum_a) : n_fx;
    sel_w  = PW'(sel);
    if (sel_w > PRM_MAXV)       q_out = elem_t'(PRM_MAXV);
    else if (sel_w < -PRM_MAXV) q_out = elem_t'(-PRM_MAXV);
    else                        q_out = elem_t'(sel);
  end

  haan_fx2fp #(.IN_W(FX_W), .IN_FRAC(FX_FRAC)) u_fx2fp (
    .fmt(out_fmt), .in_fx(sel), .out_elem(fp_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) out_elem <= (out_fmt == FMT_INT8) ? q_out : fp_out;
  end

endmodule
