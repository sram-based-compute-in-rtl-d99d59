// ldlif_cim_top: SRAM compute-in-memory accelerator for one linear-decay SNN layer.
//
// The datapath is MAC -> scaler -> LD-LIF. A binary spike vector of N_ROWS inputs is
// applied to the weight array, which returns N_BLOCKS 12-bit synaptic sums in one pass;
// the scaler brings them to the 10-bit membrane scale; the LD-LIF array then applies
// V <- V + MAC - DCY to every neuron in place, fires where the result reaches TH, and
// resets fired neurons to 0, all in three cycles.
//
// Interface and timing:
//   weights   w_we/w_row/w_data write one row (one weight per block) per cycle.
//   potential v_we/v_wdata load all potentials while idle.
//   step      start with in_spk, shift, dcy and th while `ready`; the MAC and scaler are
//             combinational and their result is captured in that cycle. Three cycles
//             later spike_valid pulses with `spikes`. Steps may be issued every 3 cycles.
// Sizes (32 x 256 x 4-bit weights, 12-bit MAC, 10-bit VMEM, 3-cycle update) are the
// paper's; the start/ready protocol, the shift input of the scaler and the `vmem`
// observation port are this design's.
module ldlif_cim_top
#(
  parameter int unsigned N_BLOCKS = ldlif_pkg::N_BLOCKS,
  parameter int unsigned N_ROWS   = ldlif_pkg::N_ROWS,
  parameter int unsigned W_BITS   = ldlif_pkg::W_BITS,
  parameter int unsigned MAC_W    = ldlif_pkg::MAC_W,
  parameter int unsigned VMEM_W   = ldlif_pkg::VMEM_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // weight write
  input  logic                            w_we,
  input  logic [$clog2(N_ROWS)-1:0]       w_row,
  input  logic [N_BLOCKS-1:0][W_BITS-1:0] w_data,
  // membrane potential write
  input  logic                            v_we,
  input  logic [N_BLOCKS-1:0][VMEM_W-1:0] v_wdata,
  // time step
  input  logic                            start,
  input  logic [N_ROWS-1:0]               in_spk,
  input  logic [1:0]                      shift,
  input  logic [VMEM_W-1:0]               dcy,
  input  logic [VMEM_W-1:0]               th,
  output logic                            ready,
  output logic                            spike_valid,
  output logic [N_BLOCKS-1:0]             spikes,
  output logic [N_BLOCKS-1:0][VMEM_W-1:0] vmem
);

  logic [N_BLOCKS-1:0][MAC_W-1:0]  mac;
  logic [N_BLOCKS-1:0][VMEM_W-1:0] mac_s;

  cim_mac #(.N_BLOCKS(N_BLOCKS), .N_ROWS(N_ROWS), .W_BITS(W_BITS), .MAC_W(MAC_W)) u_mac (
    .clk   (clk),
    .w_we  (w_we),
    .w_row (w_row),
    .w_data(w_data),
    .in_spk(in_spk),
    .mac   (mac)
  );

  scaler #(.LANES(N_BLOCKS), .IN_W(MAC_W), .OUT_W(VMEM_W)) u_scl (
    .mac   (mac),
    .shift (shift),
    .scaled(mac_s)
  );

  ld_lif #(.N_NEUR(N_BLOCKS), .VMEM_W(VMEM_W)) u_lif (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .mac_in     (mac_s),
    .dcy        (dcy),
    .th         (th),
    .v_we       (v_we),
    .v_wdata    (v_wdata),
    .ready      (ready),
    .spike_valid(spike_valid),
    .spikes     (spikes),
    .vmem       (vmem)
  );

endmodule
