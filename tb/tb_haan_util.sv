// tb_haan_util: reference helpers shared by the testbenches. Conversions
// between real numbers and FP32/FP16 bit patterns and fixed-point values,
// written independently of the RTL (FP16 by hand, FP32 through the
// IEEE double bit layout).
package tb_haan_util;

  // FP32 <-> real through the IEEE double layout: same sign, exponent
  // re-biased (127 vs 1023), mantissa widened or truncated (52 vs 23 bits).
  function automatic real fp32_to_real(input logic [31:0] b);
    logic [63:0] d;
    if (b[30:23] == 8'd0) return 0.0;
    d = {b[31], 11'(int'(b[30:23]) - 127 + 1023), b[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // truncating encoder; |r| must lie in the FP32 normal range or be 0
  function automatic logic [31:0] real_to_fp32(input real r);
    logic [63:0] d;
    if (r == 0.0) return 32'd0;
    d = $realtobits(r);
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp16_to_real(input logic [15:0] b);
    int  e;
    real m;
    e = int'(b[14:10]);
    m = real'(b[9:0]) / 1024.0;
    if (e == 0) return (b[15] ? -1.0 : 1.0) * m * pow2(-14);
    return (b[15] ? -1.0 : 1.0) * (1.0 + m) * pow2(e - 15);
  endfunction

  // FP16 encoding by truncation; |r| must lie in the normal range.
  function automatic logic [15:0] real_to_fp16(input real r);
    logic s;
    int   e;
    real  a;
    int   m;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a == 0.0) return {s, 15'd0};
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m = int'($floor((a - 1.0) * 1024.0));
    return {s, 5'(e + 15), 10'(m)};
  endfunction

  // value of a signed fixed-point number given as up to 96 bits
  function automatic real fx_to_real(input logic signed [95:0] v, input int frac);
    logic signed [95:0] hi;
    logic [47:0]        lo;
    hi = v >>> 48;
    lo = v[47:0];
    return (real'(longint'(hi)) * pow2(48) + real'(longint'({16'd0, lo}))) * pow2(-frac);
  endfunction

  function automatic real rabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // Truncate toward zero to an integer-valued real
  function automatic real rtrunc(input real r);
    return (r >= 0.0) ? $floor(r) : $ceil(r);
  endfunction

endpackage
