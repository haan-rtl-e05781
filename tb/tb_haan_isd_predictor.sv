// tb_haan_isd_predictor: checks the log-linear ISD predictor.
//  * skip-range flags: anchor_layer only at layer i, skip_layer for
//    i < layer <= j, neither when skipping is disabled;
//  * with an integer slope e the prediction must be exactly
//    ISD_i * 2^(e (k - i)) (power-of-two steps are exact in the bit-pattern
//    logarithm);
//  * with a fractional slope it must be within 7 % of the true log-linear
//    value (error bound of the piecewise-linear logarithm);
//  * per-token anchors are kept apart, results arrive one cycle after the
//    request, results clamp at zero and at the largest FP32 number.
module tb_haan_isd_predictor;
  import tb_haan_util::*;

  logic clk = 0, rst_n = 0;
  logic skip_en, anchor_layer, skip_layer, wr_en, rd_en, pred_valid;
  logic [7:0] skip_i, skip_j, layer;
  logic signed [31:0] decay;
  logic [10:0] wr_token, rd_token;
  logic [31:0] wr_isd, pred_isd;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  haan_isd_predictor dut (.*);

  real anchor [16];

  task automatic predict(input int tok, input int k, input real e, input real tol);
    real exp_v, got;
    layer = 8'(k); rd_token = 11'(tok); rd_en = 1;
    @(negedge clk);
    rd_en = 0;
    checks++;
    if (!pred_valid) begin failures++; $display("FAIL no pred_valid"); end
    exp_v = anchor[tok] * $pow(2.0, e * real'(k - int'(skip_i)));
    got = fp32_to_real(pred_isd);
    checks++;
    if (rabs(got - exp_v) > tol * exp_v) begin
      failures++; $display("FAIL tok=%0d k=%0d e=%g got %g exp %g", tok, k, e, got, exp_v);
    end
    @(negedge clk);
    checks++;
    if (pred_valid) begin failures++; $display("FAIL pred_valid held"); end
  endtask

  initial begin
    skip_en = 1; skip_i = 8'd50; skip_j = 8'd60; layer = 0;
    decay = '0; wr_en = 0; rd_en = 0; wr_token = 0; rd_token = 0; wr_isd = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // skip-range flags
    for (int k = 40; k < 70; k++) begin
      layer = 8'(k); #1;
      checks += 2;
      if (anchor_layer != (k == 50)) begin failures++; $display("FAIL anchor flag k=%0d", k); end
      if (skip_layer != (k > 50 && k <= 60)) begin failures++; $display("FAIL skip flag k=%0d", k); end
    end
    skip_en = 0; layer = 8'd50; #1; checks++;
    if (anchor_layer || skip_layer) begin failures++; $display("FAIL flags with skip off"); end
    skip_en = 1;
    // anchors for 16 tokens
    layer = 8'd50;
    for (int t = 0; t < 16; t++) begin
      anchor[t] = fp32_to_real(real_to_fp32(0.5 + real'($urandom() % 1000) / 10.0));
      wr_en = 1; wr_token = 11'(t); wr_isd = real_to_fp32(anchor[t]);
      @(negedge clk);
    end
    wr_en = 0;
    // integer slopes: exact
    decay = -32'sd1 <<< 23;  // e = -1
    for (int t = 0; t < 16; t++) predict(t, 51 + (t % 10), -1.0, 0.0);
    decay = 32'sd1 <<< 23;   // e = +1
    for (int t = 0; t < 16; t++) predict(t, 52, 1.0, 0.0);
    // fractional slopes: within the log approximation's error
    for (int r = 0; r < 50; r++) begin
      real e;
      int t;
      e = -(real'($urandom() % 1000) / 4000.0);
      decay = 32'(longint'($floor(e * pow2(23))));
      e = real'(decay) / pow2(23);
      t = $urandom() % 16;
      predict(t, 51 + ($urandom() % 10), e, 0.07);
    end
    // clamping
    decay = -32'sd40 <<< 23;
    layer = 8'd60; rd_token = 0; rd_en = 1; @(negedge clk); rd_en = 0; checks++;
    if (pred_isd != 32'd0) begin failures++; $display("FAIL clamp low %h", pred_isd); end
    decay = 32'sd40 <<< 23;
    rd_en = 1; @(negedge clk); rd_en = 0; checks++;
    if (pred_isd != 32'h7F7F_FFFF) begin failures++; $display("FAIL clamp high %h", pred_isd); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
