// tb_haan_buffer: checks the two-read-port buffer against a reference
// array: random writes and simultaneous reads on both ports, one-cycle read
// latency, read data held while the read enable is low, and old data
// returned when an address is read and written in the same cycle.
module tb_haan_buffer;

  localparam int W = 64, D = 16;
  logic clk = 0;
  logic we, re_a, re_b;
  logic [3:0] waddr, raddr_a, raddr_b;
  logic [W-1:0] wdata, rdata_a, rdata_b;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  haan_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    logic [W-1:0] ea, eb;
    we = 0; re_a = 0; re_b = 0; waddr = 0; raddr_a = 0; raddr_b = 0; wdata = 0;
    @(negedge clk);
    for (int i = 0; i < D; i++) begin
      we = 1; waddr = 4'(i); wdata = {$urandom(), $urandom()}; ref_mem[i] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int k = 0; k < 500; k++) begin
      re_a = 1; re_b = 1;
      raddr_a = 4'($urandom()); raddr_b = 4'($urandom());
      ea = ref_mem[raddr_a]; eb = ref_mem[raddr_b];
      we = ($urandom() % 2 == 1); waddr = 4'($urandom()); wdata = {$urandom(), $urandom()};
      @(negedge clk);
      if (we) ref_mem[waddr] = wdata;
      checks += 2;
      if (rdata_a != ea) begin failures++; $display("FAIL port A"); end
      if (rdata_b != eb) begin failures++; $display("FAIL port B"); end
      // hold
      re_a = 0; re_b = 0; we = 0;
      raddr_a = raddr_a + 1; raddr_b = raddr_b + 1;
      @(negedge clk);
      checks += 2;
      if (rdata_a != ea) begin failures++; $display("FAIL hold A"); end
      if (rdata_b != eb) begin failures++; $display("FAIL hold B"); end
    end
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
