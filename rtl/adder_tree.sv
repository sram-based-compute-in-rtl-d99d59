// adder_tree: sums the products of one MAC block into a single signed result.
//
// N_IN signed W_IN-bit operands are added in a balanced binary tree of log2(N_IN)
// levels; each level halves the number of partial sums. All sums are carried at the
// full OUT_W width, which for 256 four-bit weights (12 bits) cannot overflow:
// 256 x (-8) = -2048 is the most negative sum.
//
// Interface and timing: purely combinational, `sum` follows `in` in the same cycle.
// The paper gives the adder tree and its 12-bit output; the balanced two-input tree and
// the two's-complement weights are this design's choices. N_IN must be a power of two.
module adder_tree #(
  parameter int unsigned N_IN  = ldlif_pkg::N_ROWS,
  parameter int unsigned W_IN  = ldlif_pkg::W_BITS,
  parameter int unsigned OUT_W = ldlif_pkg::MAC_W
) (
  input  logic [N_IN-1:0][W_IN-1:0] in,
  output logic signed [OUT_W-1:0]   sum
);

  localparam int unsigned LEVELS = $clog2(N_IN);

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    logic signed [OUT_W-1:0] s [N_IN >> l];
    if (l == 0) begin : g_leaf
      for (genvar j = 0; j < N_IN; j++) begin : g_j
        assign s[j] = OUT_W'(signed'(in[j]));
      end
    end else begin : g_node
      for (genvar j = 0; j < (N_IN >> l); j++) begin : g_j
        assign s[j] = g_lvl[l-1].s[2*j] + g_lvl[l-1].s[2*j+1];
      end
    end
  end

  assign sum = g_lvl[LEVELS].s[0];

endmodule
