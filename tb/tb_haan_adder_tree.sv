// tb_haan_adder_tree: checks the adder tree at its default size (128
// operands of 48 bits) and at an odd size (5 operands) against a plain
// running sum, with random operands and with all operands at the most
// negative and most positive values (no overflow allowed).
module tb_haan_adder_tree;

  logic signed [47:0] a [128];
  logic signed [54:0] s;
  logic signed [15:0] b [5];
  logic signed [18:0] t;
  int checks = 0, failures = 0;

  haan_adder_tree dut (.in(a), .sum(s));
  haan_adder_tree #(.N(5), .W(16)) dut5 (.in(b), .sum(t));

  task automatic check;
    logic signed [63:0] ea, eb;
    #1;
    ea = 0; eb = 0;
    foreach (a[i]) ea += 64'(a[i]);
    foreach (b[i]) eb += 64'(b[i]);
    checks += 2;
    if (64'(s) != ea) begin failures++; $display("FAIL N=128 got %0d exp %0d", s, ea); end
    if (64'(t) != eb) begin failures++; $display("FAIL N=5 got %0d exp %0d", t, eb); end
  endtask

  initial begin
    for (int k = 0; k < 200; k++) begin
      foreach (a[i]) a[i] = 48'({$urandom(), $urandom()});
      foreach (b[i]) b[i] = 16'($urandom());
      check();
    end
    foreach (a[i]) a[i] = {1'b1, 47'd0};
    foreach (b[i]) b[i] = 16'h8000;
    check();
    foreach (a[i]) a[i] = {1'b0, {47{1'b1}}};
    foreach (b[i]) b[i] = 16'h7FFF;
    check();
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
