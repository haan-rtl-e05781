// tb_haan_fx2fp: checks the FX2FP unit (80-bit Q33.46 input, its default)
// against a real-number model. For every random input the FP32 and FP16
// results are decoded back to reals: the magnitude must not exceed the
// input's (truncation) and must lie within one unit in the last place of
// it, with the input's sign. Zero, values beyond the FP16 range
// (saturation to 65504) and values below it (flush to zero) are checked
// exactly.
module tb_haan_fx2fp;
  import haan_pkg::*;
  import tb_haan_util::*;

  fmt_e  fmt;
  sq_t   in_fx;
  elem_t out_elem;
  int    checks = 0, failures = 0;

  haan_fx2fp dut (.fmt(fmt), .in_fx(in_fx), .out_elem(out_elem));

  task automatic check_close(input real v, input real got, input real ulp_rel);
    checks++;
    if (rabs(got) > rabs(v) || rabs(v) - rabs(got) > rabs(v) * ulp_rel
        || (v != 0.0 && ((v < 0.0) != (got < 0.0)))) begin
      failures++;
      $display("FAIL fmt=%0d in=%h value=%g got=%g (%h)", fmt, in_fx, v, got, out_elem);
    end
  endtask

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int sh;
      real v;
      sh = $urandom() % 76;
      in_fx = sq_t'({$urandom(), $urandom(), $urandom()}) >>> sh;
      if ($urandom() % 2 == 1) in_fx = -in_fx;
      v = fx_to_real(96'(in_fx), SQ_FRAC);
      fmt = FMT_FP32; #1;
      check_close(v, fp32_to_real(out_elem), pow2(-23));
      fmt = FMT_FP16; #1;
      if (rabs(v) < 65504.0 && rabs(v) >= pow2(-14)) begin
        check_close(v, fp16_to_real(out_elem[15:0]), pow2(-10));
        checks++;
        if (out_elem[31:16] != 0) begin failures++; $display("FAIL fp16 upper bits"); end
      end
    end
    in_fx = '0; fmt = FMT_FP32; #1; checks++;
    if (out_elem != 0) begin failures++; $display("FAIL zero"); end
    in_fx = sq_t'(80'sd1) <<< (SQ_FRAC + 20); fmt = FMT_FP16; #1; checks++;   // 2^20
    if (out_elem[15:0] != 16'h7BFF) begin failures++; $display("FAIL fp16 sat %h", out_elem); end
    in_fx = -(sq_t'(80'sd1) <<< (SQ_FRAC - 20)); fmt = FMT_FP16; #1; checks++; // -2^-20
    if (out_elem[15:0] != 16'h8000) begin failures++; $display("FAIL fp16 flush %h", out_elem); end
    in_fx = sq_t'(80'sd3) <<< (SQ_FRAC - 1); fmt = FMT_FP32; #1; checks++;    // 1.5
    if (out_elem != 32'h3FC0_0000) begin failures++; $display("FAIL 1.5 %h", out_elem); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
