// tb_haan_norm_unit: checks one normalization lane against the real-number
// formula s = alpha (z - mean) isd + beta (or (z - mean) isd without the
// affine step), for FP32, FP16 and fixed-point (Q8.23) outputs. Operands
// are random and issued every cycle; each result must follow its operand
// by exactly one cycle. Saturation of the fixed-point output is checked.
module tb_haan_norm_unit;
  import haan_pkg::*;
  import tb_haan_util::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, affine_en, out_valid;
  fx_t  z_fx, mean, isd;
  prm_t alpha, beta;
  fmt_e out_fmt;
  elem_t out_elem;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  haan_norm_unit dut (.*);

  function automatic fx_t to_fx(input real r);
    return fx_t'(longint'($floor(r * pow2(23))));
  endfunction

  initial begin
    in_valid = 0; affine_en = 0; out_fmt = FMT_FP32;
    z_fx = '0; mean = '0; isd = '0; alpha = '0; beta = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      real zr, mr, ir, ar, br, e, g, tol;
      zr = real'(int'($urandom() % 20001) - 10000) / 1000.0;
      mr = real'(int'($urandom() % 2001) - 1000) / 1000.0;
      ir = real'($urandom() % 5000 + 1) / 1000.0;
      ar = real'(int'($urandom() % 4001) - 2000) / 1000.0;
      br = real'(int'($urandom() % 2001) - 1000) / 1000.0;
      z_fx = to_fx(zr); mean = to_fx(mr); isd = to_fx(ir);
      alpha = prm_t'(to_fx(ar)); beta = prm_t'(to_fx(br));
      zr = fx_to_real(96'(z_fx), 23); mr = fx_to_real(96'(mean), 23);
      ir = fx_to_real(96'(isd), 23); ar = fx_to_real(96'(alpha), 23);
      br = fx_to_real(96'(beta), 23);
      affine_en = ($urandom() % 2 == 1);
      out_fmt = fmt_e'($urandom() % 3);
      in_valid = 1;
      e = (zr - mr) * ir;
      if (affine_en) e = e * ar + br;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL no out_valid"); end
      case (out_fmt)
        FMT_FP32: begin g = fp32_to_real(out_elem); tol = 4.0 * pow2(-23) * (1.0 + rabs(e)); end
        FMT_FP16: begin g = fp16_to_real(out_elem[15:0]); tol = pow2(-10) * rabs(e) + 4.0 * pow2(-23) * (1.0 + rabs(e)); end
        default:  begin g = fx_to_real(96'(signed'(out_elem)), 23); tol = 4.0 * pow2(-23) * (1.0 + rabs(e));
                        if (e > 256.0) e = 256.0 - pow2(-23);
                        if (e < -256.0) e = -256.0 + pow2(-23); end
      endcase
      checks++;
      if (rabs(g - e) > tol) begin
        failures++; $display("FAIL fmt=%0d aff=%0d got %g exp %g", out_fmt, affine_en, g, e);
      end
      if (i % 3 == 0) begin @(negedge clk); checks++;
        if (out_valid) begin failures++; $display("FAIL out_valid held"); end
      end
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
