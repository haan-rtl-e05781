// tb_haan_top: end-to-end test of the normalization accelerator at a
// reduced size (P_D = 4, P_N = 8, N_MAX = 32, 4 token slots), so that every
// entry is consumed by the statistics side in two passes.
//
// A sequence of "layers" is run, each on freshly loaded tokens and
// parameters, and every output element is compared with a real-number
// model of LayerNorm / RMSNorm that uses the same subsample and, for
// skipped layers, the log-linear prediction from the model's own ISD at
// the anchor layer:
//   layer 3: LayerNorm, FP32 in/out, N = 30 (partial last entry)
//   layer 5: RMSNorm, FP16 in/out, N = 32, N_sub = 16, anchor of the skip
//            range (5, 8]: ISDs stored for sequence positions 4..7
//   layer 7: RMSNorm, skipped: ISD predicted, no statistics pass, e = -1
//   layer 8: LayerNorm, INT8 in, fixed-point out, skipped: mean from a
//            statistics pass, ISD predicted, e = -1
//   layer 2: LayerNorm, FP32 in, FP16 out, affine step off, N = 17,
//            N_sub = 13 (partial last pass), 3 tokens
// Mechanisms counted (each must occur): statistics of one token overlapping
// the normalization of the previous one, the queue between the two sides
// running full, skipped layers without and with a statistics pass, anchor
// writes, subsample masking, multi-pass entries, each input and output
// format, the affine step switched off. Each token's entries must leave on
// consecutive cycles (one entry per cycle).
module tb_haan_top;
  import haan_pkg::*;
  import tb_haan_util::*;

  localparam int P_D = 4, P_N = 8, N_MAX = 32, BUF_TOKENS = 4, MAX_SEQ = 16;
  localparam int SLOT = N_MAX / P_N;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  fmt_e cfg_in_fmt, cfg_out_fmt;
  logic cfg_rms, cfg_affine, cfg_skip_en;
  logic [5:0] cfg_n_dim, cfg_n_sub;
  inv_t cfg_inv_d;
  sq_t  cfg_eps;
  logic [7:0] cfg_layer, cfg_skip_i, cfg_skip_j;
  logic signed [31:0] cfg_decay;
  logic [2:0] cfg_num_tokens;
  logic [3:0] cfg_token_base;
  logic in_we, prm_we, start, busy, done, out_valid, out_last;
  logic [3:0] in_waddr;
  logic [1:0] prm_waddr, out_token, out_entry;
  elem_t in_wdata [P_N];
  prm_t  prm_alpha [P_N], prm_beta [P_N];
  elem_t out_data [P_N];

  haan_top #(.P_D(P_D), .P_N(P_N), .N_MAX(N_MAX), .BUF_TOKENS(BUF_TOKENS),
             .MAX_SEQ(MAX_SEQ)) dut (.*);

  int checks = 0, failures = 0;
  real z [BUF_TOKENS][N_MAX];
  real al [N_MAX], be [N_MAX];
  real ref_isd_seq [MAX_SEQ];          // model's ISD per sequence position at the anchor
  elem_t got [BUF_TOKENS][SLOT][P_N];
  int    got_cnt [BUF_TOKENS];
  int    last_cyc [BUF_TOKENS];
  int    cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters (statistics-side states: 1 = SA_FEED, 5 = SA_PUSH)
  int n_overlap = 0, n_qfull = 0, n_pred_nostats = 0, n_pred_stats = 0;
  int n_anchor = 0, n_masked = 0, n_slice = 0, n_affine_off = 0;
  int n_fmt_in [3], n_fmt_out [3];

  always @(posedge clk) if (rst_n) begin
    if (int'(dut.sa_state) == 1 && dut.nb_active) n_overlap++;
    if (int'(dut.sa_state) == 5 && dut.q_cnt == 2'd2) n_qfull++;
    if (dut.pred_valid && cfg_rms)  n_pred_nostats++;
    if (dut.pred_valid && !cfg_rms) n_pred_stats++;
    if (dut.pred_wr) n_anchor++;
    if (dut.f_valid && dut.st_mask != '1) n_masked++;
    if (dut.f_valid && dut.f_slice != 0) n_slice++;
  end

  // collect outputs
  always @(negedge clk) if (rst_n && out_valid) begin
    int t;
    t = int'(out_token);
    if (got_cnt[t] > 0) begin
      checks++;
      if (cyc != last_cyc[t] + 1) begin
        failures++; $display("FAIL token %0d entries not on consecutive cycles", t);
      end
    end
    last_cyc[t] = cyc;
    for (int l = 0; l < P_N; l++) got[t][out_entry][l] = out_data[l];
    got_cnt[t]++;
  end

  function automatic elem_t enc(input real v, input fmt_e f);
    if (f == FMT_INT8) return elem_t'(int'(v));
    if (f == FMT_FP16) return {16'd0, real_to_fp16(v)};
    return real_to_fp32(v);
  endfunction

  function automatic real dec(input elem_t e, input fmt_e f);
    if (f == FMT_INT8) return fx_to_real(96'(signed'(e)), 23);
    if (f == FMT_FP16) return fp16_to_real(e[15:0]);
    return fp32_to_real(e);
  endfunction

  task automatic load(input int ntok, input int n, input fmt_e f);
    for (int t = 0; t < ntok; t++) begin
      real scale, off;
      scale = 0.2 + real'($urandom() % 100) / 20.0;
      off   = real'(int'($urandom() % 200) - 100) / 100.0;
      for (int i = 0; i < N_MAX; i++) begin
        real v;
        if (f == FMT_INT8) v = real'(int'($urandom() % 200) - 100);
        else v = off + scale * real'(int'($urandom() % 2001) - 1000) / 1000.0;
        if (f == FMT_FP16) v = fp16_to_real(real_to_fp16(v));
        else if (f == FMT_FP32) v = fp32_to_real(real_to_fp32(v));
        z[t][i] = v;
      end
      for (int e = 0; e < SLOT; e++) begin
        @(negedge clk);
        in_we = 1; in_waddr = 4'(t * SLOT + e);
        for (int l = 0; l < P_N; l++) in_wdata[l] = enc(z[t][e*P_N+l], f);
      end
      @(negedge clk); in_we = 0;
    end
    for (int e = 0; e < SLOT; e++) begin
      @(negedge clk);
      prm_we = 1; prm_waddr = 2'(e);
      for (int l = 0; l < P_N; l++) begin
        prm_alpha[l] = prm_t'(int'($floor((0.5 + real'($urandom() % 1000) / 1000.0) * pow2(23))));
        prm_beta[l]  = prm_t'(int'($floor((real'(int'($urandom() % 1000) - 500) / 1000.0) * pow2(23))));
        al[e*P_N+l] = real'(prm_alpha[l]) / pow2(23);
        be[e*P_N+l] = real'(prm_beta[l]) / pow2(23);
      end
    end
    @(negedge clk); prm_we = 0;
  endtask

  task automatic run_layer(input int layer, input logic rms, input fmt_e fi, input fmt_e fo,
                           input logic aff, input int n, input int nsub, input int ntok,
                           input int base, input real e);
    int ne;
    logic pred, anch;
    load(ntok, n, fi);
    cfg_layer = 8'(layer); cfg_rms = rms; cfg_in_fmt = fi; cfg_out_fmt = fo;
    cfg_affine = aff; cfg_n_dim = 6'(n); cfg_n_sub = 6'(nsub);
    cfg_inv_d = inv_t'((64'd1 << 32) / 64'(nsub));
    cfg_num_tokens = 3'(ntok); cfg_token_base = 4'(base);
    cfg_decay = 32'(longint'($floor(e * pow2(23))));
    n_fmt_in[fi]++; n_fmt_out[fo]++;
    if (!aff) n_affine_off++;
    pred = cfg_skip_en && layer > int'(cfg_skip_i) && layer <= int'(cfg_skip_j);
    anch = cfg_skip_en && layer == int'(cfg_skip_i);
    for (int t = 0; t < BUF_TOKENS; t++) got_cnt[t] = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      begin wait (done); end
      begin repeat (2000) @(posedge clk); end
    join_any
    disable fork;
    checks++;
    if (!done) begin failures++; $display("FAIL layer %0d did not finish", layer); end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
    ne = (n + P_N - 1) / P_N;
    for (int t = 0; t < ntok; t++) begin
      real sm, sq, mean, isd;
      checks++;
      if (got_cnt[t] != ne) begin
        failures++; $display("FAIL layer %0d token %0d: %0d entries, expected %0d", layer, t, got_cnt[t], ne);
      end
      sm = 0; sq = 0;
      for (int i = 0; i < nsub; i++) begin sm += z[t][i]; sq += z[t][i] * z[t][i]; end
      mean = rms ? 0.0 : sm / nsub;
      isd = 1.0 / $sqrt(sq / nsub - mean * mean + 1.0e-5);
      if (anch) ref_isd_seq[base + t] = isd;
      if (pred) isd = ref_isd_seq[base + t] * $pow(2.0, real'(cfg_decay) / pow2(23) * real'(layer - int'(cfg_skip_i)));
      for (int i = 0; i < n; i++) begin
        real ex, g, tol;
        ex = (z[t][i] - mean) * isd;
        if (aff) ex = ex * al[i] + be[i];
        g = dec(got[t][i / P_N][i % P_N], fo);
        tol = 0.005 * rabs(ex) + 0.002 + ((fo == FMT_FP16) ? pow2(-10) * rabs(ex) : 0.0);
        checks++;
        if (rabs(g - ex) > tol) begin
          failures++;
          $display("FAIL layer %0d token %0d elem %0d: got %g exp %g", layer, t, i, g, ex);
        end
      end
    end
  endtask

  initial begin
    in_we = 0; prm_we = 0; start = 0; in_waddr = 0; prm_waddr = 0;
    foreach (in_wdata[i]) in_wdata[i] = '0;
    foreach (prm_alpha[i]) begin prm_alpha[i] = '0; prm_beta[i] = '0; end
    foreach (n_fmt_in[i]) begin n_fmt_in[i] = 0; n_fmt_out[i] = 0; end
    cfg_in_fmt = FMT_FP32; cfg_out_fmt = FMT_FP32; cfg_rms = 0; cfg_affine = 1;
    cfg_n_dim = 6'd32; cfg_n_sub = 6'd32; cfg_inv_d = '0;
    cfg_eps = sq_t'(longint'(1.0e-5 * pow2(46)));
    cfg_layer = 0; cfg_skip_en = 1; cfg_skip_i = 8'd5; cfg_skip_j = 8'd8;
    cfg_decay = '0; cfg_num_tokens = 0; cfg_token_base = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      run_layer(3, 0, FMT_FP32, FMT_FP32, 1, 30, 30, 4, 0, 0.0);
      run_layer(5, 1, FMT_FP16, FMT_FP16, 1, 32, 16, 4, 4, 0.0);
      run_layer(7, 1, FMT_FP16, FMT_FP32, 1, 32, 16, 4, 4, -1.0);
      run_layer(8, 0, FMT_INT8, FMT_INT8, 1, 32, 32, 4, 4, -1.0);
      run_layer(2, 0, FMT_FP32, FMT_FP16, 0, 17, 13, 3, 0, 0.0);
    end
    $display("mechanisms: overlap=%0d queue_full=%0d pred_no_stats=%0d pred_with_stats=%0d anchor=%0d masked=%0d slice=%0d affine_off=%0d",
             n_overlap, n_qfull, n_pred_nostats, n_pred_stats, n_anchor, n_masked, n_slice, n_affine_off);
    begin
      int m [8];
      m = '{n_overlap, n_qfull, n_pred_nostats, n_pred_stats, n_anchor, n_masked, n_slice, n_affine_off};
      foreach (m[i]) begin
        checks++;
        if (m[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
      for (int f = 0; f < 3; f++) begin
        checks += 2;
        if (n_fmt_in[f] == 0)  begin failures++; $display("FAIL input format %0d unused", f); end
        if (n_fmt_out[f] == 0) begin failures++; $display("FAIL output format %0d unused", f); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
