// haan_input_stats: input statistics calculator. Produces the mean and the
// variance of one input vector z, fed P_D elements per pass over as many
// passes as the vector (or its subsample) needs.
//
// How it works. The variance is formed as E(z^2) - E(z)^2 so that both sums
// run in parallel over a single read of the data.
//   Stage 1 ("Cycle 1"): each lane converts its element to fixed point
//     (FP2FX, bypassed for INT8), squares it and multiplies the square by the
//     constant 1/D; an adder tree sums the lanes' z values.
//   Stage 2 ("Cycle 2"): a second adder tree sums the lanes' z^2/D terms;
//     both partial sums are added into the E(X^2) and E(X) buffers.
//   After the last pass the outputs are formed from the buffers:
//     Mean = sum(z) * 1/D, Variance = E(z^2) + eps - Mean^2.
//   In RMSNorm mode the mean is forced to 0, so Variance = E(z^2) + eps,
//   i.e. the mean square.
// Lanes whose in_mask bit is 0 contribute zero; this truncates the vector to
// its first N_sub elements when subsampling, and blanks the tail of a
// partial last pass. 1/D is an input: 1/N, or 1/N_sub when subsampling.
//
// Interface: start clears both buffers and may coincide with the first
// pass. A pass is accepted in every cycle with in_valid; in_last marks the
// final one. out_valid rises two cycles after the last pass is accepted and
// stays high, with mean and variance stable, until the next start.
// Formats (see haan_pkg): mean Q24.23, variance and eps Q33.46, inv_d Q1.32.
// |z| is saturated below 2^16 before squaring so the sums cannot overflow.
//
// The datapath (two multipliers per lane, two adder trees, two buffers, eps
// added after the E(X^2) buffer, a multiplier and a subtractor at the end)
// follows the paper's figure; widths, the masking and the handshake are this
// design's own.
module haan_input_stats
  import haan_pkg::*;
#(
  parameter int unsigned P_D   = 128,
  parameter int unsigned N_MAX = 4096
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              in_valid,
  input  logic              in_last,
  input  elem_t             in_elem [P_D],
  input  logic [P_D-1:0]    in_mask,
  input  fmt_e              fmt,
  input  logic              rms_mode,
  input  inv_t              inv_d,
  input  sq_t               eps,
  output logic              out_valid,
  output fx_t               mean,
  output sq_t               variance
);

  localparam int unsigned LG_PD  = (P_D > 1) ? $clog2(P_D) : 0;
  localparam int unsigned ZS_W   = FX_W + LG_PD;             // one pass of z
  localparam int unsigned QS_W   = SQ_W + LG_PD;             // one pass of z^2/D
  localparam int unsigned ACC_W  = FX_W + $clog2(N_MAX) + 1; // sum of z
  localparam int unsigned E2_W   = SQ_W + 2;                 // E(z^2)
  localparam fx_t         Z_MAX  = fx_t'((64'd1 << (Z_LIM_LOG2 + FX_FRAC)) - 1);

  // ---------------- Stage 1: FP2FX, z^2, z^2/D, tree of z ----------------
  fx_t  z     [P_D];
  sq_t  sqd   [P_D];
  logic signed [ZS_W-1:0] zsum;

  for (genvar i = 0; i < P_D; i++) begin : g_lane
    fx_t  zr;
    fx_t  zc;
    logic [2*FX_W-1:0]       sq;
    logic [2*FX_W+INV_W-1:0] sq_scaled;
    haan_fp2fx #(.OUT_W(FX_W), .OUT_FRAC(FX_FRAC)) u_fp2fx (
      .fmt(fmt), .in_elem(in_elem[i]), .out_fx(zr));
    always_comb begin
      zc = in_mask[i] ? zr : '0;
      if (zc > Z_MAX)  zc = Z_MAX;
      if (zc < -Z_MAX) zc = -Z_MAX;
      z[i]      = zc;
      sq        = unsigned'((2*FX_W)'(zc) * (2*FX_W)'(zc)); // Q.46, < 2^78
      sq_scaled = (2*FX_W+INV_W)'(sq) * (2*FX_W+INV_W)'(inv_d);
      sqd[i]    = sq_t'(sq_scaled >> INV_FRAC);           // Q.46 again
    end
  end

  haan_adder_tree #(.N(P_D), .W(FX_W)) u_tree_z (.in(z), .sum(zsum));

  logic                   s1_valid, s1_last;
  logic signed [ZS_W-1:0] s1_zsum;
  sq_t                    s1_sqd [P_D];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_last  <= 1'b0;
    end else begin
      s1_valid <= in_valid;
      s1_last  <= in_valid && in_last;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_zsum <= zsum;
      s1_sqd  <= sqd;
    end
  end

  // ---------------- Stage 2: tree of z^2/D, E(X^2) and E(X) buffers -------
  logic signed [QS_W-1:0]  qsum;
  logic signed [E2_W-1:0]  e2_buf;
  logic signed [ACC_W-1:0] ex_buf;
  logic                    done;

  haan_adder_tree #(.N(P_D), .W(SQ_W)) u_tree_sq (.in(s1_sqd), .sum(qsum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e2_buf <= '0;
      ex_buf <= '0;
      done   <= 1'b0;
    end else if (start) begin
      e2_buf <= '0;
      ex_buf <= '0;
      done   <= 1'b0;
    end else if (s1_valid) begin
      e2_buf <= e2_buf + E2_W'(qsum);
      ex_buf <= ex_buf + ACC_W'(s1_zsum);
      done   <= s1_last;
    end
  end

  // ---------------- Outputs: Mean, Mean^2, Variance ------------------------
  logic signed [ACC_W+INV_W:0] mean_full;
  logic signed [2*FX_W-1:0]    mean_sq;
  logic signed [E2_W+1:0]      var_full;
  localparam logic signed [E2_W+1:0] SQ_MAXV = (E2_W+2)'({1'b0, {(SQ_W-1){1'b1}}});

  always_comb begin
    mean_full = (ACC_W+INV_W+1)'(ex_buf) * signed'({1'b0, inv_d});
    mean      = rms_mode ? '0 : fx_t'(mean_full >>> INV_FRAC);
    mean_sq   = (2*FX_W)'(mean) * (2*FX_W)'(mean);                 // Q.46
    var_full  = (E2_W+2)'(e2_buf) + (E2_W+2)'(eps) - (E2_W+2)'(mean_sq);
    if (var_full < 0)            variance = '0;
    else if (var_full > SQ_MAXV) variance = sq_t'(SQ_MAXV);
    else                         variance = sq_t'(var_full);
  end

  assign out_valid = done;

endmodule
