// wl_driver: word-line decoder of the MAC weight array.
//
// Turns a row address into a one-hot word-line vector while a weight write is requested;
// all word lines are low otherwise, so the array only computes.
//
// Interface and timing: combinational; `wl` is valid in the cycle `we` and `addr` are.
// The paper only names the block; the binary address and the enable are this design's.
module wl_driver #(
  parameter int unsigned N_ROWS = ldlif_pkg::N_ROWS
) (
  input  logic                      we,
  input  logic [$clog2(N_ROWS)-1:0] addr,
  output logic [N_ROWS-1:0]         wl
);

  always_comb begin
    wl = '0;
    if (we) wl[addr] = 1'b1;
  end

endmodule
