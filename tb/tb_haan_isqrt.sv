// tb_haan_isqrt: checks the square root inverter against 1/sqrt(x)
// computed in real arithmetic, for variances spread over 1e-6 .. 1e4.
// One Newton step after the 0x5F3759DF guess must bring the relative error
// below 0.2 %. Operands are issued back to back (full throughput) and each
// result must appear exactly three cycles after its operand. A few exact
// points (x = 1, 4, 0.25) are checked as well.
module tb_haan_isqrt;
  import haan_pkg::*;
  import tb_haan_util::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  sq_t  variance;
  fx_t  isd;
  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  haan_isqrt dut (.*);

  real xs [$];
  int  ts [$];
  real max_err = 0.0;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      real x, e, g, rel;
      int t;
      x = xs.pop_front();
      t = ts.pop_front();
      e = 1.0 / $sqrt(x);
      g = fx_to_real(96'(isd), FX_FRAC);
      rel = rabs(g - e) / e;
      if (rel > max_err) max_err = rel;
      checks += 2;
      if (rel > 0.002 + pow2(-23) / e) begin
        failures++; $display("FAIL x=%g got %g exp %g", x, g, e);
      end
      if (cyc - t != 3) begin
        failures++; $display("FAIL latency %0d", cyc - t);
      end
    end
  end

  task automatic issue(input real x);
    variance = sq_t'(longint'($floor(x * pow2(46) / 1024.0))) <<< 10;
    xs.push_back(fx_to_real(96'(variance), SQ_FRAC));
    ts.push_back(cyc);
    in_valid = 1;
    @(negedge clk);
  endtask

  initial begin
    in_valid = 0; variance = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    issue(1.0); issue(4.0); issue(0.25);
    for (int i = 0; i < 2000; i++) begin
      real x;
      x = pow2(int'($urandom() % 34) - 20) * (1.0 + real'($urandom() % 65536) / 65536.0);
      issue(x);
      if (i % 7 == 0) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (xs.size() != 0) begin failures++; $display("FAIL %0d results missing", xs.size()); end
    $display("max relative error %g", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
