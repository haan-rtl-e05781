// tb_haan_cfg_runner: helper of tb_haan_configs. Instantiates the
// accelerator with the given (P_D, P_N) and the default N_MAX and runs the
// OPT-2.7B setting on it: LayerNorm, N = 2560, FP16 in and out,
// N_sub = 1280, skip range (55, 62], layer 55 (anchor, computed) and
// layer 59 (ISD predicted with e = -0.25, i.e. exactly a quarter of the
// anchor). Every output element is compared with a real-number model.
// Reports its check and failure counts and raises finished at the end.
module tb_haan_cfg_runner #(
  parameter int P_D = 80,
  parameter int P_N = 160
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic finished
);
  import haan_pkg::*;
  import tb_haan_util::*;

  localparam int N_MAX = 4096, SLOT = (N_MAX + P_N - 1) / P_N;
  localparam int AW = $clog2(16 * SLOT), EW = $clog2(SLOT);

  logic rst_n = 0;

  fmt_e cfg_in_fmt, cfg_out_fmt;
  logic cfg_rms, cfg_affine, cfg_skip_en;
  logic [12:0] cfg_n_dim, cfg_n_sub;
  inv_t cfg_inv_d;
  sq_t  cfg_eps;
  logic [7:0] cfg_layer, cfg_skip_i, cfg_skip_j;
  logic signed [31:0] cfg_decay;
  logic [4:0] cfg_num_tokens;
  logic [10:0] cfg_token_base;
  logic in_we, prm_we, start, busy, done, out_valid, out_last;
  logic [AW-1:0] in_waddr;
  logic [EW-1:0] prm_waddr, out_entry;
  logic [3:0] out_token;
  elem_t in_wdata [P_N];
  prm_t  prm_alpha [P_N], prm_beta [P_N];
  elem_t out_data [P_N];

  haan_top #(.P_D(P_D), .P_N(P_N)) dut (.*);

  localparam int NTOK = 2;
  real z [NTOK][SLOT*P_N];
  real al [SLOT*P_N], be [SLOT*P_N];
  elem_t got [NTOK][SLOT][P_N];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && out_valid)
    for (int l = 0; l < P_N; l++) got[out_token][out_entry][l] = out_data[l];

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

  task automatic load(input fmt_e f);
    for (int t = 0; t < NTOK; t++) begin
      for (int i = 0; i < SLOT*P_N; i++) begin
        real v;
        if (f == FMT_INT8) v = real'(int'($urandom() % 200) - 100);
        else v = fp16_to_real(real_to_fp16(0.1 + real'(int'($urandom() % 2001) - 1000) / 1000.0));
        z[t][i] = v;
      end
      for (int e = 0; e < SLOT; e++) begin
        @(negedge clk);
        in_we = 1; in_waddr = AW'(t * SLOT + e);
        for (int l = 0; l < P_N; l++) in_wdata[l] = enc(z[t][e*P_N+l], f);
      end
    end
    for (int e = 0; e < SLOT; e++) begin
      @(negedge clk);
      in_we = 0; prm_we = 1; prm_waddr = EW'(e);
      for (int l = 0; l < P_N; l++) begin
        prm_alpha[l] = prm_t'(int'($floor((0.5 + real'($urandom() % 1000) / 1000.0) * pow2(23))));
        prm_beta[l]  = prm_t'(int'($floor((real'(int'($urandom() % 1000) - 500) / 1000.0) * pow2(23))));
        al[e*P_N+l] = real'(prm_alpha[l]) / pow2(23);
        be[e*P_N+l] = real'(prm_beta[l]) / pow2(23);
      end
    end
    @(negedge clk); prm_we = 0; in_we = 0;
  endtask

  real ref_isd [NTOK];

  task automatic run(input string name, input logic rms, input fmt_e fi, input fmt_e fo,
                     input int n, input int nsub, input int li, input int lj, input int layer);
    logic pred;
    int ne;
    load(fi);
    cfg_rms = rms; cfg_in_fmt = fi; cfg_out_fmt = fo; cfg_n_sub = 13'(nsub); cfg_n_dim = 13'(n);
    cfg_inv_d = inv_t'((64'd1 << 32) / 64'(nsub));
    cfg_skip_en = 1; cfg_skip_i = 8'(li); cfg_skip_j = 8'(lj); cfg_layer = 8'(layer);
    cfg_decay = -(32'sd1 <<< 21);   // e = -0.25
    pred = (layer > li && layer <= lj);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      begin wait (done); end
      begin repeat (5000) @(posedge clk); end
    join_any
    disable fork;
    checks++;
    if (!done) begin failures++; $display("FAIL %s layer %0d did not finish", name, layer); end
    ne = (n + P_N - 1) / P_N;
    for (int t = 0; t < NTOK; t++) begin
      real sm, sq, mean, isd;
      int nf;
      nf = 0;
      sm = 0; sq = 0;
      for (int i = 0; i < nsub; i++) begin sm += z[t][i]; sq += z[t][i] * z[t][i]; end
      mean = rms ? 0.0 : sm / nsub;
      isd = 1.0 / $sqrt(sq / nsub - mean * mean + 1.0e-5);
      if (!pred) ref_isd[t] = isd;
      else isd = ref_isd[t] * $pow(2.0, -0.25 * real'(layer - li));
      for (int i = 0; i < n; i++) begin
        real ex, g, tol;
        ex = (z[t][i] - mean) * isd * al[i] + be[i];
        g = dec(got[t][i / P_N][i % P_N], fo);
        tol = 0.006 * rabs(ex) + 0.002 + ((fo == FMT_FP16) ? pow2(-10) * rabs(ex) : 0.0);
        checks++;
        if (rabs(g - ex) > tol) begin
          failures++; nf++;
          if (nf < 4) $display("FAIL %s layer %0d token %0d elem %0d: got %g exp %g", name, layer, t, i, g, ex);
        end
      end
    end
  endtask

  initial begin
    checks = 0; failures = 0; finished = 0;
    in_we = 0; prm_we = 0; start = 0; in_waddr = 0; prm_waddr = 0;
    foreach (in_wdata[i]) in_wdata[i] = '0;
    foreach (prm_alpha[i]) begin prm_alpha[i] = '0; prm_beta[i] = '0; end
    cfg_in_fmt = FMT_FP16; cfg_out_fmt = FMT_FP16; cfg_rms = 0; cfg_affine = 1;
    cfg_n_dim = 13'd2560; cfg_n_sub = 13'd1280; cfg_inv_d = '0;
    cfg_eps = sq_t'(longint'(1.0e-5 * pow2(46)));
    cfg_layer = 8'd1; cfg_skip_en = 0; cfg_skip_i = 8'd55; cfg_skip_j = 8'd62;
    cfg_decay = '0; cfg_num_tokens = 5'(NTOK); cfg_token_base = 11'd7;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run("OPT-2.7B", 0, FMT_FP16, FMT_FP16, 2560, 1280, 55, 62, 55);
    run("OPT-2.7B", 0, FMT_FP16, FMT_FP16, 2560, 1280, 55, 62, 59);
    finished = 1;
  end
endmodule
