// vmem_neuron: one LD-LIF neuron, a VMEM_W-bit membrane cell with in-place update.
//
// VMEM_W bit cells form two VMEM_W-bit words, VMEM_A and VMEM_B, and a ripple-carry adder
// (carry into bit 0 is 0). Each cycle the word selected by RWL is added to the operand
// picked by VMEM_MUX (scaled MAC, -(DCY+TH) or TH) and the sum is written to the word
// selected by WWL. The three-cycle update driven by the sequencer is
//   cycle 1: Vmid  = Vinit + MAC
//   cycle 2: V'mid = Vmid - (DCY + TH)
//   cycle 3: V'mid >= 0 (sign bit 0): spike, Vfinal = 0
//            V'mid <  0 (sign bit 1): Vfinal = V'mid + TH = Vinit + MAC - DCY
// so comparing against the threshold needs no comparator, only the sign bit of the
// word read in cycle 3. The spiking circuit raises SPIKE when SPIKE_EN is high and the
// read sign bit is 0; SPIKE disconnects the adder (PE_DE = WE | SPIKE) and drives 0 onto
// every WBL, resetting the potential. WE (write mode) also disconnects the adder and puts
// `wdata` on the WBLs, loading an initial potential.
//
// Interface and timing: `spike` is combinational within cycle 3; all writes land at the
// rising edge. Arithmetic is VMEM_W-bit two's complement and wraps on overflow, so the
// carry out of the top bit is left unconnected. The
// update order, the sign-bit spike test, the reset to 0 and PE_DE follow the paper;
// the wrap-around and the RBL read of 0 when idle are this design's choices.
module vmem_neuron
  import ldlif_pkg::vmem_mux_e;
#(
  parameter int unsigned VMEM_W = ldlif_pkg::VMEM_W
) (
  input  logic              clk,
  input  logic [1:0]        wwl,
  input  logic [1:0]        rwl,
  input  vmem_mux_e         mux_sel,
  input  logic [VMEM_W-1:0] mac,      // scaled MAC result
  input  logic [VMEM_W-1:0] ndt,      // -(DCY+TH)
  input  logic [VMEM_W-1:0] th,       // TH
  input  logic              spike_en,
  input  logic              we,       // write mode: load wdata
  input  logic [VMEM_W-1:0] wdata,
  output logic              spike,
  output logic [VMEM_W-1:0] q_a,
  output logic [VMEM_W-1:0] q_b
);

  logic [VMEM_W:0]   carry;
  logic [VMEM_W-1:0] rbl;
  logic              pe_de;
  logic [VMEM_W-1:0] wbl_ext;

  assign carry[0] = 1'b0;

  // Spiking circuit: sign of the word being read, gated by SPIKE_EN.
  assign spike   = spike_en & ~rbl[VMEM_W-1];
  // PE_DE disconnects the adder in write mode and in spiking mode.
  assign pe_de   = we | spike;
  assign wbl_ext = we ? wdata : '0;

  for (genvar i = 0; i < VMEM_W; i++) begin : g_bit
    vmem_bitcell u_bit (
      .clk     (clk),
      .wwl     (wwl),
      .rwl     (rwl),
      .mux_sel (mux_sel),
      .b_mac   (mac[i]),
      .b_ndt   (ndt[i]),
      .b_th    (th[i]),
      .cin     (carry[i]),
      .cout    (carry[i+1]),
      .pe_de   (pe_de),
      .wbl_ext (wbl_ext[i]),
      .rbl     (rbl[i]),
      .q_a     (q_a[i]),
      .q_b     (q_b[i])
    );
  end

endmodule
