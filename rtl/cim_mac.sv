// cim_mac: the compute-in-memory MAC module, N_BLOCKS columns of N_ROWS 4-bit weights.
//
// The binary spike vector `in_spk` is inverted by the input driver into INB and applied
// to every row of all blocks at once. Each block multiplies in its cells and sums in its
// adder tree, so all N_BLOCKS synaptic sums of a layer come out in one pass:
// mac[b] = sum_r W[r][b] * in_spk[r].
//
// Interface and timing: a weight row (one 4-bit weight per block) is written at the
// rising edge when `w_we` is high, row `w_row`, data `w_data[b]` for block b. `mac` is
// combinational in `in_spk`. The array shape and widths are the paper's; the write port
// stands in for the bit-line driver and pre-charge circuits, whose electrical behaviour
// is not modelled.
module cim_mac #(
  parameter int unsigned N_BLOCKS = ldlif_pkg::N_BLOCKS,
  parameter int unsigned N_ROWS   = ldlif_pkg::N_ROWS,
  parameter int unsigned W_BITS   = ldlif_pkg::W_BITS,
  parameter int unsigned MAC_W    = ldlif_pkg::MAC_W
) (
  input  logic                                clk,
  input  logic                                w_we,
  input  logic [$clog2(N_ROWS)-1:0]           w_row,
  input  logic [N_BLOCKS-1:0][W_BITS-1:0]     w_data,
  input  logic [N_ROWS-1:0]                   in_spk,
  output logic [N_BLOCKS-1:0][MAC_W-1:0]      mac
);

  logic [N_ROWS-1:0] wl;
  logic [N_ROWS-1:0] inb;

  wl_driver #(.N_ROWS(N_ROWS)) u_wl (
    .we  (w_we),
    .addr(w_row),
    .wl  (wl)
  );

  // Input driver: rows are driven with the inverted spike.
  assign inb = ~in_spk;

  for (genvar b = 0; b < N_BLOCKS; b++) begin : g_blk
    mac_block #(.N_ROWS(N_ROWS), .W_BITS(W_BITS), .MAC_W(MAC_W)) u_blk (
      .clk(clk),
      .wl (wl),
      .bl (w_data[b]),
      .inb(inb),
      .mac(mac[b])
    );
  end

endmodule
