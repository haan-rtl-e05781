// tb_haan_input_stats: checks the input statistics calculator (P_D = 8
// lanes) against a real-number model of mean = sum(z)/D and
// variance = sum(z^2)/D + eps - mean^2 (RMSNorm: mean = 0).
// Cases: FP32 LayerNorm over whole passes, a partial last pass (masked
// lanes), subsampling (only the first D elements, 1/D = 1/N_sub), RMSNorm
// with FP16 input, INT8 input, and passes with idle cycles between them.
// The result must appear exactly two cycles after the last pass and stay
// until the next start.
module tb_haan_input_stats;
  import haan_pkg::*;
  import tb_haan_util::*;

  localparam int P_D = 8;

  logic clk = 0, rst_n = 0;
  logic start, in_valid, in_last, rms_mode, out_valid;
  elem_t in_elem [P_D];
  logic [P_D-1:0] in_mask;
  fmt_e fmt;
  inv_t inv_d;
  sq_t  eps, variance;
  fx_t  mean;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  haan_input_stats #(.P_D(P_D), .N_MAX(64)) dut (.*);

  real z [64];

  // element encoding for the chosen format, and its exact value
  task automatic make_vec(input int n, input fmt_e f);
    for (int i = 0; i < n; i++) begin
      int k;
      k = int'($urandom() % 8001) - 4000;
      if (f == FMT_INT8) z[i] = real'(k % 128);
      else if (f == FMT_FP16) z[i] = fp16_to_real(real_to_fp16(real'(k) / 1024.0 + 0.3));
      else z[i] = real'(k) / 1024.0 + 0.3;
    end
  endtask

  function automatic elem_t enc(input real v, input fmt_e f);
    if (f == FMT_INT8) return elem_t'(int'(v));
    if (f == FMT_FP16) return {16'd0, real_to_fp16(v)};
    return real_to_fp32(v);
  endfunction

  task automatic run_case(input int n, input int d, input fmt_e f, input logic rms, input logic gaps);
    int npass, last_cyc, cyc;
    real sm, sq, em, ev, gm, gv;
    make_vec(n, f);
    fmt = f; rms_mode = rms;
    inv_d = inv_t'((64'd1 << 32) / 64'(d));
    eps   = sq_t'(longint'(1.0e-5 * pow2(46)));
    npass = (d + P_D - 1) / P_D;
    @(negedge clk);
    for (int p = 0; p < npass; p++) begin
      if (gaps && (p % 2 == 1)) begin
        in_valid = 0; start = 0; @(negedge clk);
      end
      start = (p == 0); in_valid = 1; in_last = (p == npass - 1);
      for (int l = 0; l < P_D; l++) begin
        int idx;
        idx = p * P_D + l;
        in_elem[l] = (idx < n) ? enc(z[idx], f) : 32'hFFFF_FFFF;
        in_mask[l] = (idx < d);
      end
      // before the last pass is accepted the result must not be valid
      if (p > 0) begin
        checks++;
        if (out_valid) begin failures++; $display("FAIL early valid"); end
      end
      @(negedge clk);
    end
    in_valid = 0; start = 0; in_last = 0;
    // now one cycle after the last pass
    checks++;
    if (out_valid) begin failures++; $display("FAIL valid after 1 cycle"); end
    @(negedge clk);
    checks++;
    if (!out_valid) begin failures++; $display("FAIL not valid after 2 cycles"); end
    sm = 0; sq = 0;
    for (int i = 0; i < d; i++) begin sm += z[i]; sq += z[i] * z[i]; end
    em = rms ? 0.0 : sm / d;
    ev = sq / d + 1.0e-5 - em * em;
    gm = fx_to_real(96'(mean), FX_FRAC);
    gv = fx_to_real(96'(variance), SQ_FRAC);
    checks += 2;
    if (rabs(gm - em) > pow2(-21)) begin
      failures++; $display("FAIL mean n=%0d d=%0d f=%0d got %g exp %g", n, d, f, gm, em);
    end
    if (rabs(gv - ev) > 1.0e-5 + 1.0e-6 * rabs(ev)) begin
      failures++; $display("FAIL var n=%0d d=%0d f=%0d rms=%0d got %g exp %g", n, d, f, rms, gv, ev);
    end
    // result held while idle
    repeat (3) @(negedge clk);
    checks++;
    if (!out_valid || fx_to_real(96'(variance), SQ_FRAC) != gv) begin
      failures++; $display("FAIL result not held");
    end
  endtask

  initial begin
    start = 0; in_valid = 0; in_last = 0; in_mask = '0; rms_mode = 0;
    fmt = FMT_FP32; inv_d = '0; eps = '0;
    foreach (in_elem[i]) in_elem[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 10; r++) begin
      run_case(40, 40, FMT_FP32, 0, 0);
      run_case(37, 37, FMT_FP32, 0, 1);
      run_case(40, 16, FMT_FP32, 0, 0);   // subsample
      run_case(40, 13, FMT_FP16, 1, 1);   // RMSNorm, subsample, partial pass
      run_case(64, 64, FMT_INT8, 0, 0);
      run_case(8, 8, FMT_FP16, 0, 0);     // single pass
    end
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
