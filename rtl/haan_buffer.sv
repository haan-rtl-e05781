// haan_buffer: on-chip buffer with one write port and two read ports.
//
// Holds input samples in the accelerator's memory layout: a sample is
// flattened into a vector and cut into entries of one input-bandwidth chunk
// each (P_N elements), stored at consecutive addresses, so that one entry
// is fetched per cycle. Port A serves the statistics path, port B the
// normalization path, so the statistics of one sample and the normalization
// of the previous one can read at the same time. The same module, with
// port A unused, holds the affine parameters alpha and beta.
//
// Interface: write when we is high (waddr, wdata). Reads are synchronous:
// rdata_x holds the entry at raddr_x one cycle after re_x, and keeps it
// while re_x is low. A read of an address written in the same cycle returns
// the old contents.
//
// The entry layout follows the paper; the two read ports and the synchronous
// read are this design's own.
module haan_buffer #(
  parameter int unsigned WIDTH = 4096,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re_a,
  input  logic [AW-1:0]    raddr_a,
  output logic [WIDTH-1:0] rdata_a,
  input  logic             re_b,
  input  logic [AW-1:0]    raddr_b,
  output logic [WIDTH-1:0] rdata_b
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)   mem[waddr] <= wdata;
    if (re_a) rdata_a    <= mem[raddr_a];
    if (re_b) rdata_b    <= mem[raddr_b];
  end

endmodule
