// haan_top: normalization accelerator for LLM LayerNorm and RMSNorm.
//
// For each token vector z of length N it computes
//   LayerNorm: s = alpha * (z - mean) * ISD + beta
//   RMSNorm  : s = alpha * z * ISD + beta
// where ISD = 1/sqrt(variance + eps) (for RMSNorm, of the mean square).
// Three cost-saving mechanisms can be configured per layer:
//   * subsampling: mean and variance are estimated from the first N_sub
//     elements only (cfg_n_sub, cfg_inv_d = 1/N_sub);
//   * ISD skipping: inside an offline-chosen layer range (i, j] the ISD is
//     not computed but predicted log-linearly from the token's ISD at layer
//     i (cfg_skip_*), bypassing the square root inverter;
//   * number formats: FP32, FP16 or INT8 input, FP32, FP16 or fixed output.
//
// Structure. Samples (tokens) sit in the input buffer, one slot of
// N_MAX/P_N entries per token, each entry P_N elements wide. Two engines
// work on consecutive tokens at once:
//   statistics side: reads token t in passes of P_D elements through the
//     input statistics calculator, then the square root inverter (or the
//     ISD predictor); (mean, ISD) go into a two-entry queue;
//   normalization side: pops (mean, ISD) of token t-1, reads its entries
//     again, P_N elements per cycle, through P_N FP2FX units and P_N
//     normalization units, and streams the results out.
// A skipped RMSNorm layer needs no statistics pass at all; a skipped
// LayerNorm layer still makes one for its mean.
//
// Interface and timing. Load tokens with in_we (slot t starts at address
// t*N_MAX/P_N) and alpha/beta with prm_we (entry e holds elements
// e*P_N..e*P_N+P_N-1). Hold the cfg_* inputs stable, pulse start for one
// cycle; busy stays high until the last entry of token cfg_num_tokens-1 has
// left, and done pulses with it. Results leave as out_valid/out_token/
// out_entry/out_last/out_data, one entry per cycle while a token streams;
// there is no back-pressure. Lanes past N in the last entry carry
// don't-care values. cfg_token_base + t is the token's position in the
// sequence, used to index the ISD predictor's anchor table.
//
// What follows the paper: the three units, the FP2FX/FX2FP conversions, the
// fixed-point intermediate results, the entry-per-cycle memory layout, the
// subsampling by truncation, the skip rule and the pipelining across
// samples. The controller, the queue, the buffer sizes, the handshakes and
// all bit widths are this design's own.
module haan_top
  import haan_pkg::*;
#(
  parameter int unsigned P_D        = 128,
  parameter int unsigned P_N        = 128,
  parameter int unsigned N_MAX      = 4096,
  parameter int unsigned BUF_TOKENS = 16,
  parameter int unsigned MAX_SEQ    = 2048,
  parameter int unsigned LAYER_W    = 8,
  localparam int unsigned SLOT   = (N_MAX + P_N - 1) / P_N,
  localparam int unsigned DEPTH  = BUF_TOKENS * SLOT,
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned EW     = (SLOT > 1) ? $clog2(SLOT) : 1,
  localparam int unsigned DIM_W  = $clog2(N_MAX + 1),
  localparam int unsigned TB_W   = (BUF_TOKENS > 1) ? $clog2(BUF_TOKENS) : 1,
  localparam int unsigned TOK_W  = (MAX_SEQ > 1) ? $clog2(MAX_SEQ) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration, stable while busy
  input  fmt_e               cfg_in_fmt,
  input  fmt_e               cfg_out_fmt,
  input  logic               cfg_rms,
  input  logic               cfg_affine,
  input  logic [DIM_W-1:0]   cfg_n_dim,
  input  logic [DIM_W-1:0]   cfg_n_sub,
  input  inv_t               cfg_inv_d,
  input  sq_t                cfg_eps,
  input  logic [LAYER_W-1:0] cfg_layer,
  input  logic               cfg_skip_en,
  input  logic [LAYER_W-1:0] cfg_skip_i,
  input  logic [LAYER_W-1:0] cfg_skip_j,
  input  logic signed [31:0] cfg_decay,
  input  logic [TB_W:0]      cfg_num_tokens,
  input  logic [TOK_W-1:0]   cfg_token_base,
  // input buffer load
  input  logic               in_we,
  input  logic [AW-1:0]      in_waddr,
  input  elem_t              in_wdata [P_N],
  // alpha / beta load
  input  logic               prm_we,
  input  logic [EW-1:0]      prm_waddr,
  input  prm_t               prm_alpha [P_N],
  input  prm_t               prm_beta  [P_N],
  // control
  input  logic               start,
  output logic               busy,
  output logic               done,
  // result stream
  output logic               out_valid,
  output logic [TB_W-1:0]    out_token,
  output logic [EW-1:0]      out_entry,
  output logic               out_last,
  output elem_t              out_data [P_N]
);

  localparam int unsigned R    = P_N / P_D;          // passes per entry
  localparam int unsigned RW   = (R > 1) ? $clog2(R) : 1;

  if (P_N % P_D != 0) begin : g_bad_ratio
    $error("P_N must be a multiple of P_D");
  end

  // ------------------------------------------------------------------ derived
  logic [DIM_W-1:0] n_pass, n_ent;
  assign n_pass = DIM_W'((cfg_n_sub + DIM_W'(P_D - 1)) / DIM_W'(P_D));
  assign n_ent  = DIM_W'((cfg_n_dim + DIM_W'(P_N - 1)) / DIM_W'(P_N));

  logic anchor_layer, skip_layer;

  // ------------------------------------------------------------------ buffers
  logic [P_N*ELEM_W-1:0]     in_wflat, rd_a, rd_b;
  logic [2*P_N*PRM_W-1:0]    prm_wflat, prm_rd;
  for (genvar l = 0; l < P_N; l++) begin : g_pack
    assign in_wflat[l*ELEM_W +: ELEM_W]             = in_wdata[l];
    assign prm_wflat[l*PRM_W +: PRM_W]              = prm_alpha[l];
    assign prm_wflat[(P_N+l)*PRM_W +: PRM_W]        = prm_beta[l];
  end

  logic          rd_a_en, rd_b_en;
  logic [AW-1:0] rd_a_addr, rd_b_addr;
  logic [EW-1:0] prm_raddr;

  haan_buffer #(.WIDTH(P_N*ELEM_W), .DEPTH(DEPTH)) u_in_buf (
    .clk, .we(in_we), .waddr(in_waddr), .wdata(in_wflat),
    .re_a(rd_a_en), .raddr_a(rd_a_addr), .rdata_a(rd_a),
    .re_b(rd_b_en), .raddr_b(rd_b_addr), .rdata_b(rd_b));

  logic [2*P_N*PRM_W-1:0] prm_unused;
  haan_buffer #(.WIDTH(2*P_N*PRM_W), .DEPTH(SLOT)) u_prm_buf (
    .clk, .we(prm_we), .waddr(prm_waddr), .wdata(prm_wflat),
    .re_a(1'b0), .raddr_a('0), .rdata_a(prm_unused),
    .re_b(rd_b_en), .raddr_b(prm_raddr), .rdata_b(prm_rd));

  // ========================================================= statistics side
  typedef enum logic [2:0] {SA_IDLE, SA_FEED, SA_WAIT, SA_ISQ, SA_PRED, SA_PUSH}
    sa_state_e;
  sa_state_e sa_state;

  logic [TB_W:0]    sa_tok;
  logic [DIM_W-1:0] sa_pass;
  fx_t              sa_mean, sa_isd;

  // read stage of a pass
  logic             f_valid, f_first, f_last;
  logic [RW-1:0]    f_slice;
  logic [DIM_W-1:0] f_pass;

  // statistics calculator
  elem_t          st_elem [P_D];
  logic [P_D-1:0] st_mask;
  logic           st_valid;
  fx_t            st_mean;
  sq_t            st_var;

  for (genvar l = 0; l < P_D; l++) begin : g_slice
    always_comb begin
      st_elem[l] = rd_a[(int'(f_slice)*P_D + l)*ELEM_W +: ELEM_W];
      st_mask[l] = (32'(f_pass) * P_D + l) < 32'(cfg_n_sub);
    end
  end

  haan_input_stats #(.P_D(P_D), .N_MAX(N_MAX)) u_stats (
    .clk, .rst_n,
    .start(f_valid && f_first), .in_valid(f_valid), .in_last(f_last),
    .in_elem(st_elem), .in_mask(st_mask),
    .fmt(cfg_in_fmt), .rms_mode(cfg_rms), .inv_d(cfg_inv_d), .eps(cfg_eps),
    .out_valid(st_valid), .mean(st_mean), .variance(st_var));

  // square root inverter
  logic isq_in_valid, isq_valid;
  fx_t  isq_isd;
  haan_isqrt u_isqrt (
    .clk, .rst_n, .in_valid(isq_in_valid), .variance(st_var),
    .out_valid(isq_valid), .isd(isq_isd));

  // ISD predictor, fed with FP32 ISDs
  elem_t            isd_fp, pred_fp;
  fx_t              pred_fx;
  logic             pred_rd, pred_valid, pred_wr;
  logic [TOK_W-1:0] sa_seq;

  assign sa_seq = cfg_token_base + TOK_W'(sa_tok);

  haan_fx2fp #(.IN_W(FX_W), .IN_FRAC(FX_FRAC)) u_isd_fx2fp (
    .fmt(FMT_FP32), .in_fx(isq_isd), .out_elem(isd_fp));

  haan_isd_predictor #(.MAX_SEQ(MAX_SEQ), .LAYER_W(LAYER_W)) u_pred (
    .clk, .rst_n,
    .skip_en(cfg_skip_en), .skip_i(cfg_skip_i), .skip_j(cfg_skip_j),
    .layer(cfg_layer), .decay(cfg_decay),
    .anchor_layer, .skip_layer,
    .wr_en(pred_wr), .wr_token(sa_seq), .wr_isd(isd_fp),
    .rd_en(pred_rd), .rd_token(sa_seq),
    .pred_valid, .pred_isd(pred_fp));

  haan_fp2fx #(.OUT_W(FX_W), .OUT_FRAC(FX_FRAC)) u_pred_fp2fx (
    .fmt(FMT_FP32), .in_elem(pred_fp), .out_fx(pred_fx));

  // two-entry queue of (token, mean, ISD) between the two sides
  typedef struct packed {
    logic [TB_W:0] tok;
    fx_t           mean;
    fx_t           isd;
  } stat_t;
  stat_t      q_mem [2];
  logic [1:0] q_cnt;
  logic       q_wptr, q_rptr, q_push, q_pop;

  logic run;      // a batch is in progress

  assign rd_a_en      = (sa_state == SA_FEED);
  assign rd_a_addr    = AW'(sa_tok) * AW'(SLOT) + AW'(sa_pass / DIM_W'(R));
  assign isq_in_valid = (sa_state == SA_WAIT) && st_valid && !f_valid && !skip_layer;
  assign pred_rd      = (sa_state == SA_PRED);
  assign pred_wr      = isq_valid && anchor_layer;
  assign q_push       = (sa_state == SA_PUSH) && (q_cnt != 2'd2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa_state <= SA_IDLE;
      sa_tok   <= '0;
      sa_pass  <= '0;
      f_valid  <= 1'b0;
      f_first  <= 1'b0;
      f_last   <= 1'b0;
      f_slice  <= '0;
      f_pass   <= '0;
      sa_mean  <= '0;
      sa_isd   <= '0;
    end else begin
      f_valid <= 1'b0;
      f_first <= 1'b0;
      f_last  <= 1'b0;
      unique case (sa_state)
        SA_IDLE: begin
          if (start) begin
            sa_tok  <= '0;
            sa_pass <= '0;
            if (cfg_num_tokens != 0)
              sa_state <= (skip_layer && cfg_rms) ? SA_PRED : SA_FEED;
          end
        end
        SA_FEED: begin
          f_valid <= 1'b1;
          f_first <= (sa_pass == 0);
          f_last  <= (sa_pass == n_pass - 1);
          f_slice <= RW'(sa_pass % DIM_W'(R));
          f_pass  <= sa_pass;
          if (sa_pass == n_pass - 1) begin
            sa_pass  <= '0;
            sa_state <= SA_WAIT;
          end else begin
            sa_pass <= sa_pass + 1'b1;
          end
        end
        SA_WAIT: begin
          if (st_valid && !f_valid) begin
            sa_mean  <= st_mean;
            sa_state <= skip_layer ? SA_PRED : SA_ISQ;
          end
        end
        SA_ISQ: begin
          if (isq_valid) begin
            sa_isd   <= isq_isd;
            sa_state <= SA_PUSH;
          end
        end
        SA_PRED: begin
          // one-cycle read of the anchor table; result taken in SA_PUSH
          if (cfg_rms) sa_mean <= '0;
          sa_state <= SA_PUSH;
        end
        SA_PUSH: begin
          if (pred_valid) sa_isd <= pred_fx;
          if (q_cnt != 2'd2) begin
            if (sa_tok + 1'b1 == cfg_num_tokens) begin
              sa_state <= SA_IDLE;
            end else begin
              sa_state <= (skip_layer && cfg_rms) ? SA_PRED : SA_FEED;
            end
            sa_tok <= sa_tok + 1'b1;
          end
        end
        default: sa_state <= SA_IDLE;
      endcase
    end
  end

  // The value pushed is the one complete in SA_PUSH; a predicted ISD arrives
  // in the first cycle of SA_PUSH, so it is forwarded here.
  stat_t q_in;
  always_comb begin
    q_in.tok  = sa_tok;
    q_in.mean = sa_mean;
    q_in.isd  = pred_valid ? pred_fx : sa_isd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_cnt  <= '0;
      q_wptr <= 1'b0;
      q_rptr <= 1'b0;
    end else begin
      if (q_push) begin
        q_mem[q_wptr] <= q_in;
        q_wptr        <= ~q_wptr;
      end
      if (q_pop) q_rptr <= ~q_rptr;
      q_cnt <= q_cnt + {1'b0, q_push} - {1'b0, q_pop};
    end
  end

  // ====================================================== normalization side
  logic          nb_active;
  stat_t         nb_cur;
  logic [EW-1:0] nb_ent;

  assign q_pop     = !nb_active && (q_cnt != 0) && run;
  assign rd_b_en   = nb_active;
  assign rd_b_addr = AW'(nb_cur.tok) * AW'(SLOT) + AW'(nb_ent);
  assign prm_raddr = nb_ent;

  // read stage
  logic          r_valid, r_last;
  logic [TB_W-1:0] r_tok;
  logic [EW-1:0] r_ent;
  fx_t           r_mean, r_isd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nb_active <= 1'b0;
      nb_ent    <= '0;
      nb_cur    <= '0;
      r_valid   <= 1'b0;
      r_last    <= 1'b0;
      r_tok     <= '0;
      r_ent     <= '0;
      r_mean    <= '0;
      r_isd     <= '0;
    end else begin
      r_valid <= nb_active;
      r_last  <= nb_active && (DIM_W'(nb_ent) == n_ent - 1);
      r_tok   <= TB_W'(nb_cur.tok);
      r_ent   <= nb_ent;
      r_mean  <= nb_cur.mean;
      r_isd   <= nb_cur.isd;
      if (q_pop) begin
        nb_cur    <= q_mem[q_rptr];
        nb_active <= 1'b1;
        nb_ent    <= '0;
      end else if (nb_active) begin
        if (DIM_W'(nb_ent) == n_ent - 1) begin
          nb_active <= 1'b0;
          nb_ent    <= '0;
        end else begin
          nb_ent <= nb_ent + 1'b1;
        end
      end
    end
  end

  // lanes: FP2FX, normalization unit
  logic [P_N-1:0] lane_valid;
  for (genvar l = 0; l < P_N; l++) begin : g_norm
    fx_t z_fx;
    haan_fp2fx #(.OUT_W(FX_W), .OUT_FRAC(FX_FRAC)) u_fp2fx (
      .fmt(cfg_in_fmt), .in_elem(rd_b[l*ELEM_W +: ELEM_W]), .out_fx(z_fx));
    haan_norm_unit u_norm (
      .clk, .rst_n, .in_valid(r_valid),
      .z_fx, .mean(r_mean), .isd(r_isd),
      .alpha(prm_rd[l*PRM_W +: PRM_W]), .beta(prm_rd[(P_N+l)*PRM_W +: PRM_W]),
      .affine_en(cfg_affine), .out_fmt(cfg_out_fmt),
      .out_valid(lane_valid[l]), .out_elem(out_data[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_last  <= 1'b0;
      out_token <= '0;
      out_entry <= '0;
    end else begin
      out_last  <= r_valid && r_last;
      out_token <= r_tok;
      out_entry <= r_ent;
    end
  end
  assign out_valid = lane_valid[0];

  // ================================================================ batch
  logic [TB_W:0] tok_out;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run     <= 1'b0;
      tok_out <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run     <= (cfg_num_tokens != 0);
        tok_out <= '0;
        done    <= (cfg_num_tokens == 0);
      end else if (run && out_valid && out_last) begin
        tok_out <= tok_out + 1'b1;
        if (tok_out + 1'b1 == cfg_num_tokens) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
  assign busy = run;

  // ============================================================ assertions
  a_queue_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(q_cnt == 2'd2 && q_push && !q_pop));
  a_start_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !run);
  a_slot_fits: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (cfg_n_dim <= DIM_W'(N_MAX)) && (cfg_n_sub <= cfg_n_dim)
              && (cfg_num_tokens <= (TB_W+1)'(BUF_TOKENS)));

endmodule
