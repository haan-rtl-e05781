// haan_pkg: number formats and shared constants of the normalization
// accelerator.
//
// Every intermediate result is held in two's-complement fixed point. The
// 23 fraction bits of the data format come from the Newton constant 1.5 =
// 0x00C00000 of the square root inverter. The other widths are this
// design's choice:
//   fx_t  : Q24.23 in 48 bits. Input elements, mean, ISD, normalized values.
//   sq_t  : Q33.46 in 80 bits. z^2/D terms, E(z^2), eps and the variance.
//           The extra fraction bits keep small per-lane terms z^2/D from
//           vanishing when D is in the thousands.
//   inv_t : unsigned Q1.32 in 33 bits. The constant 1/D (D = N or N_sub).
//   prm_t : Q8.23 in 32 bits. The affine parameters alpha and beta and the
//           fixed-point output format.
// Elements travel in 32-bit containers: FP32 uses all of them, FP16 the low
// 16 bits, INT8 the low 8 bits.
package haan_pkg;

  localparam int unsigned ELEM_W  = 32;

  localparam int unsigned FX_W    = 48;
  localparam int unsigned FX_FRAC = 23;
  localparam int unsigned SQ_W    = 80;
  localparam int unsigned SQ_FRAC = 46;
  localparam int unsigned INV_W   = 33;
  localparam int unsigned INV_FRAC = 32;
  localparam int unsigned PRM_W   = 32;

  typedef logic signed [FX_W-1:0]  fx_t;
  typedef logic signed [SQ_W-1:0]  sq_t;
  typedef logic        [INV_W-1:0] inv_t;
  typedef logic signed [PRM_W-1:0] prm_t;
  typedef logic        [ELEM_W-1:0] elem_t;

  // Element format. On the output side FMT_INT8 selects the fixed-point
  // (quantized) output, which bypasses the FX2FP conversion.
  typedef enum logic [1:0] {
    FMT_FP32 = 2'd0,
    FMT_FP16 = 2'd1,
    FMT_INT8 = 2'd2
  } fmt_e;

  // Fast inverse square root magic constant (initial guess).
  localparam logic [31:0] ISQRT_MAGIC = 32'h5F37_59DF;
  // 1.5 in Q.23, the Newton-step constant.
  localparam fx_t NEWTON_1P5 = fx_t'(48'h0000_00C0_0000);

  // Largest |z| the statistics datapath accepts before squaring (2^16).
  localparam int unsigned Z_LIM_LOG2 = 16;

endpackage
