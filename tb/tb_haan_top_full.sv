// tb_haan_top_full: the accelerator at its default size (P_D = P_N = 128,
// N_MAX = 4096, 16 token slots, 2048-entry anchor table) running complete
// normalization layers on LLM-sized vectors:
//   1. LayerNorm over N = 4096 FP16 elements for 2 tokens, FP16 output,
//      affine step on, statistics over all elements;
//   2. RMSNorm over N = 4096 with INT8 input, subsampled to the first
//      N_sub = 256 elements (the LLaMA-7B setting), fixed-point output.
// Every output element is compared with a real-number model, and the
// cycle count of each layer is checked against the schedule: the
// statistics side needs N_sub/P_D passes plus a fixed latency, the
// normalization side N/P_N cycles per token, and the two overlap.
module tb_haan_top_full;
  import haan_pkg::*;
  import tb_haan_util::*;

  localparam int P_N = 128, N_MAX = 4096, SLOT = N_MAX / P_N;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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
  logic [8:0] in_waddr;
  logic [4:0] prm_waddr, out_entry;
  logic [3:0] out_token;
  elem_t in_wdata [P_N];
  prm_t  prm_alpha [P_N], prm_beta [P_N];
  elem_t out_data [P_N];

  haan_top dut (.*);

  int checks = 0, failures = 0;
  localparam int NTOK = 2;
  real z [NTOK][N_MAX];
  real al [N_MAX], be [N_MAX];
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
      for (int i = 0; i < N_MAX; i++) begin
        real v;
        if (f == FMT_INT8) v = real'(int'($urandom() % 200) - 100);
        else v = fp16_to_real(real_to_fp16(0.1 + real'(int'($urandom() % 2001) - 1000) / 1000.0));
        z[t][i] = v;
      end
      for (int e = 0; e < SLOT; e++) begin
        @(negedge clk);
        in_we = 1; in_waddr = 9'(t * SLOT + e);
        for (int l = 0; l < P_N; l++) in_wdata[l] = enc(z[t][e*P_N+l], f);
      end
    end
    for (int e = 0; e < SLOT; e++) begin
      @(negedge clk);
      in_we = 0; prm_we = 1; prm_waddr = 5'(e);
      for (int l = 0; l < P_N; l++) begin
        prm_alpha[l] = prm_t'(int'($floor((0.5 + real'($urandom() % 1000) / 1000.0) * pow2(23))));
        prm_beta[l]  = prm_t'(int'($floor((real'(int'($urandom() % 1000) - 500) / 1000.0) * pow2(23))));
        al[e*P_N+l] = real'(prm_alpha[l]) / pow2(23);
        be[e*P_N+l] = real'(prm_beta[l]) / pow2(23);
      end
    end
    @(negedge clk); prm_we = 0; in_we = 0;
  endtask

  task automatic run(input logic rms, input fmt_e fi, input fmt_e fo, input int nsub);
    int t0, cycles, bound;
    load(fi);
    cfg_rms = rms; cfg_in_fmt = fi; cfg_out_fmt = fo; cfg_n_sub = 13'(nsub);
    cfg_inv_d = inv_t'((64'd1 << 32) / 64'(nsub));
    @(negedge clk); start = 1; t0 = cyc; @(negedge clk); start = 0;
    fork
      begin wait (done); end
      begin repeat (5000) @(posedge clk); end
    join_any
    disable fork;
    cycles = cyc - t0;
    checks++;
    if (!done) begin failures++; $display("FAIL layer did not finish"); end
    // Each token costs the statistics side N_sub/P_D passes plus at most
    // 10 cycles (read, two statistics stages, three square-root stages,
    // queue push), and the normalization side N/P_N cycles. The two sides
    // overlap, so the layer takes about the slower side's total plus one
    // token of the faster side and a few cycles of output latency.
    bound = (nsub / 128 + 10) * NTOK + SLOT + 4;
    if (bound < (nsub / 128 + 10) + NTOK * SLOT + 4) bound = (nsub / 128 + 10) + NTOK * SLOT + 4;
    $display("layer with N_sub=%0d took %0d cycles (bound %0d)", nsub, cycles, bound);
    checks++;
    if (cycles > bound || cycles < NTOK * SLOT) begin
      failures++; $display("FAIL cycle count %0d outside [%0d, %0d]", cycles, NTOK * SLOT, bound);
    end
    for (int t = 0; t < NTOK; t++) begin
      real sm, sq, mean, isd;
      sm = 0; sq = 0;
      for (int i = 0; i < nsub; i++) begin sm += z[t][i]; sq += z[t][i] * z[t][i]; end
      mean = rms ? 0.0 : sm / nsub;
      isd = 1.0 / $sqrt(sq / nsub - mean * mean + 1.0e-5);
      for (int i = 0; i < N_MAX; i++) begin
        real ex, g, tol;
        ex = (z[t][i] - mean) * isd * al[i] + be[i];
        g = dec(got[t][i / P_N][i % P_N], fo);
        tol = 0.005 * rabs(ex) + 0.002 + ((fo == FMT_FP16) ? pow2(-10) * rabs(ex) : 0.0);
        checks++;
        if (rabs(g - ex) > tol) begin
          failures++;
          if (failures < 10) $display("FAIL token %0d elem %0d: got %g exp %g", t, i, g, ex);
        end
      end
    end
  endtask

  initial begin
    in_we = 0; prm_we = 0; start = 0; in_waddr = 0; prm_waddr = 0;
    foreach (in_wdata[i]) in_wdata[i] = '0;
    foreach (prm_alpha[i]) begin prm_alpha[i] = '0; prm_beta[i] = '0; end
    cfg_in_fmt = FMT_FP16; cfg_out_fmt = FMT_FP16; cfg_rms = 0; cfg_affine = 1;
    cfg_n_dim = 13'd4096; cfg_n_sub = 13'd4096; cfg_inv_d = '0;
    cfg_eps = sq_t'(longint'(1.0e-5 * pow2(46)));
    cfg_layer = 8'd1; cfg_skip_en = 0; cfg_skip_i = 8'd50; cfg_skip_j = 8'd60;
    cfg_decay = '0; cfg_num_tokens = 5'(NTOK); cfg_token_base = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, FMT_FP16, FMT_FP16, 4096);
    run(1, FMT_INT8, FMT_INT8, 256);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
