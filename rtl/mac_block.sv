// mac_block: one column ("Block") of the compute-in-memory MAC array.
//
// The column holds N_ROWS "SRAM 1x4" cells, each a 4-bit weight in four 6T bits plus
// four NOR gates. Row r is driven with the inverted spike INB[r]; each NOR takes the
// inverted weight bit WB and INB, so the row's product is NOR(WB, INB) = W AND IN, i.e.
// the weight when the spike is 1 and zero otherwise. An adder tree sums all N_ROWS
// products, so `mac` = sum over r of W[r]*IN[r], the synaptic current of one output
// neuron for one time step.
//
// The N_ROWS cells are written here as a memory array (`w_q`) with the per-row NOR
// product computed in a loop, rather than as one module instance per cell; the logic per
// cell is the same.
//
// Interface and timing: a weight is written at the rising edge into the row whose word
// line is high, from the bit-line data `bl` (the word lines come from a one-hot
// decoder). The MAC result is combinational in `inb`. The structure (256 rows of 1x4
// cells with NOR multiply, an adder tree, 12-bit output) is the paper's; two's-complement
// weights and the clocked write are this design's choices. The cells have no reset, as
// SRAM has none.
module mac_block #(
  parameter int unsigned N_ROWS = ldlif_pkg::N_ROWS,
  parameter int unsigned W_BITS = ldlif_pkg::W_BITS,
  parameter int unsigned MAC_W  = ldlif_pkg::MAC_W
) (
  input  logic                    clk,
  input  logic [N_ROWS-1:0]       wl,   // one-hot write word lines
  input  logic [W_BITS-1:0]       bl,   // weight to write
  input  logic [N_ROWS-1:0]       inb,  // inverted spike inputs
  output logic signed [MAC_W-1:0] mac
);

  logic [W_BITS-1:0]             w_q [N_ROWS];   // the SRAM 1x4 cells
  logic [N_ROWS-1:0][W_BITS-1:0] prod;

  always_ff @(posedge clk) begin
    for (int r = 0; r < int'(N_ROWS); r++) begin
      if (wl[r]) w_q[r] <= bl;
    end
  end

  // In-cell multiply: one NOR per bit, inputs WB and INB.
  always_comb begin
    for (int r = 0; r < int'(N_ROWS); r++) prod[r] = ~(~w_q[r] | {W_BITS{inb[r]}});
  end

  adder_tree #(.N_IN(N_ROWS), .W_IN(W_BITS), .OUT_W(MAC_W)) u_tree (
    .in (prod),
    .sum(mac)
  );

endmodule
