// tb_haan_configs: the two other accelerator configurations evaluated
// with a single pipeline and FP16 input, each running the OPT-2.7B
// setting (see tb_haan_cfg_runner) end to end:
//   HAAN-v2: (P_D, P_N) = (80, 160), a lane count that is not a power of
//            two and an entry consumed in two statistics passes;
//   HAAN-v3: (P_D, P_N) = (64, 128);
//   and the three further (P_D, P_N) points of the resource/latency
//   comparison: (32, 128), (256, 256) and (32, 512).
module tb_haan_configs;

  logic clk = 0;
  always #5 clk = ~clk;

  int   c2, f2, c3, f3, ca, fa, cb, fb, cc, fc;
  logic d2, d3, da, db, dc;
  int   checks, failures;

  tb_haan_cfg_runner #(.P_D(80), .P_N(160)) u_v2 (.clk, .checks(c2), .failures(f2), .finished(d2));
  tb_haan_cfg_runner #(.P_D(64), .P_N(128)) u_v3 (.clk, .checks(c3), .failures(f3), .finished(d3));
  tb_haan_cfg_runner #(.P_D(32), .P_N(128)) u_a (.clk, .checks(ca), .failures(fa), .finished(da));
  tb_haan_cfg_runner #(.P_D(256), .P_N(256)) u_b (.clk, .checks(cb), .failures(fb), .finished(db));
  tb_haan_cfg_runner #(.P_D(32), .P_N(512)) u_c (.clk, .checks(cc), .failures(fc), .finished(dc));

  initial begin
    fork
      begin wait (d2 && d3 && da && db && dc); end
      begin repeat (20000) @(posedge clk); end
    join_any
    checks = c2 + c3 + ca + cb + cc + 1;
    failures = f2 + f3 + fa + fb + fc;
    if (!(d2 && d3 && da && db && dc)) failures++;
    $display("HAAN-v2: checks=%0d failures=%0d  HAAN-v3: checks=%0d failures=%0d", c2, f2, c3, f3);
    $display("(32,128): checks=%0d failures=%0d  (256,256): checks=%0d failures=%0d  (32,512): checks=%0d failures=%0d",
             ca, fa, cb, fb, cc, fc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
