// tb_haan_fp2fx: checks the FP2FX unit against a real-number model.
// Random FP32, FP16 and INT8 elements are converted; the expected value is
// the element's real value times 2^23, truncated toward zero, or the
// saturation limit when it does not fit. Special cases: zero, subnormal,
// infinity, NaN, values just inside and outside the range.
module tb_haan_fp2fx;
  import haan_pkg::*;
  import tb_haan_util::*;

  fmt_e  fmt;
  elem_t in_elem;
  fx_t   out_fx;
  int    checks = 0, failures = 0;

  haan_fp2fx dut (.fmt(fmt), .in_elem(in_elem), .out_fx(out_fx));

  localparam real MAXV = 140737488355327.0;  // 2^47 - 1

  task automatic check_val(input real v);
    real e;
    longint exp_i;
    #1;
    e = rtrunc(v * pow2(23));
    if (e > MAXV) e = MAXV;
    if (e < -MAXV) e = -MAXV;
    exp_i = longint'(e);
    checks++;
    if (longint'(out_fx) != exp_i) begin
      failures++;
      $display("FAIL fmt=%0d in=%h value=%g got=%0d exp=%0d", fmt, in_elem, v, longint'(out_fx), exp_i);
    end
  endtask

  initial begin
    // FP32
    fmt = FMT_FP32;
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] b;
      b = $urandom();
      b[30:23] = 8'(100 + ($urandom() % 60));   // 2^-27 .. 2^32
      in_elem = b;
      check_val(fp32_to_real(b));
    end
    in_elem = 32'h0000_0000; check_val(0.0);
    in_elem = 32'h8000_0000; check_val(0.0);
    in_elem = 32'h0000_1234; check_val(0.0);            // subnormal -> 0
    in_elem = 32'h7F80_0000; check_val(1.0e30);         // +inf saturates
    in_elem = 32'hFF80_0000; check_val(-1.0e30);        // -inf saturates
    in_elem = real_to_fp32(16777215.0); check_val(16777215.0);   // fits
    in_elem = real_to_fp32(16777216.0); check_val(1.0e30);       // 2^24 saturates
    in_elem = real_to_fp32(-3.0e-7);    check_val(-3.0e-7);
    // FP16
    fmt = FMT_FP16;
    for (int i = 0; i < 2000; i++) begin
      logic [15:0] h;
      h = 16'($urandom());
      h[14:10] = 5'(1 + ($urandom() % 30));
      in_elem = {16'hDEAD, h};                           // upper bits ignored
      check_val(fp16_to_real(h));
    end
    in_elem = 32'h0000_7C00; check_val(1.0e30);          // +inf
    in_elem = 32'h0000_0001; check_val(0.0);             // subnormal
    // INT8
    fmt = FMT_INT8;
    for (int i = -128; i < 128; i++) begin
      in_elem = {24'hABCDEF, 8'(i)};
      check_val(real'(i));
    end
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
