// haan_adder_tree: balanced binary adder tree. Sums N signed W-bit operands
// into one W+$clog2(N)-bit result.
//
// How it works: the operands are sign-extended to the result width and
// padded with zeros to the next power of two, 2^L. Each level of the tree
// adds neighbouring pairs of the level below, so L levels of adders produce
// the sum; the zero padding costs no logic after constant propagation.
//
// Interface: in[i] are the operands; sum is the total, wide enough never to
// overflow. Timing: purely combinational (the statistics calculator places
// each tree inside one pipeline stage).
module haan_adder_tree #(
  parameter int unsigned N = 128,
  parameter int unsigned W = 48,
  localparam int unsigned L  = (N > 1) ? $clog2(N) : 0,
  localparam int unsigned OW = W + L
) (
  input  logic signed [W-1:0]  in  [N],
  output logic signed [OW-1:0] sum
);

  localparam int unsigned NP = 1 << L;

  // level 0: operands sign-extended, padded with zeros to NP
  logic signed [OW-1:0] lvl0 [NP];
  for (genvar i = 0; i < NP; i++) begin : g_in
    if (i < N) begin : g_op
      assign lvl0[i] = OW'(in[i]);
    end else begin : g_pad
      assign lvl0[i] = '0;
    end
  end

  // level k+1 holds NP >> (k+1) pairwise sums of level k
  for (genvar k = 0; k < L; k++) begin : g_level
    logic signed [OW-1:0] s [NP >> (k + 1)];
    for (genvar i = 0; i < (NP >> (k + 1)); i++) begin : g_node
      if (k == 0) begin : g_first
        assign s[i] = lvl0[2*i] + lvl0[2*i+1];
      end else begin : g_next
        assign s[i] = g_level[k-1].s[2*i] + g_level[k-1].s[2*i+1];
      end
    end
  end

  if (L == 0) begin : g_single
    assign sum = lvl0[0];
  end else begin : g_result
    assign sum = g_level[L-1].s[0];
  end

endmodule
