// vmem_bitcell: one bit of a membrane-potential cell with its slice of the in-memory PE.
//
// Two storage bits, VMEM_A and VMEM_B (8T SRAM cells with separate write and read ports
// in the silicon), share one write bit line WBL and one read bit line RBL. The
// processing element of the bit is a full adder: its A input is the RBL, i.e. the bit
// selected by RWL[0] (A) or RWL[1] (B); its B input comes from a three-way multiplexer
// selected by VMEM_MUX: 0 = MAC bit, 1 = -(DCY+TH) bit, 2 = TH bit. Carry in and carry
// out ripple to the neighbouring bits. The sum drives WBL unless PE_DE (PE disable) is
// high, in which case the PE is disconnected and WBL takes the external value `wbl_ext`
// (write data in write mode, 0 in spiking mode). WBL is stored into every bank whose
// write word line WWL is high.
//
// Interface and timing: read, add and write-back happen within one clock cycle; the write
// lands at the rising edge. With no read word line high the RBL reads 0. The bit-cell
// structure (two banks, FA, MUX3, PE_DE switches) follows the paper's cell schematic;
// the clocked write and the RBL value when unread are this design's choices. The storage
// has no reset, as SRAM has none.
module vmem_bitcell
  import ldlif_pkg::*;
(
  input  logic      clk,
  input  logic [1:0] wwl,      // write word lines: [0] VMEM_A, [1] VMEM_B
  input  logic [1:0] rwl,      // read word lines:  [0] VMEM_A, [1] VMEM_B
  input  vmem_mux_e mux_sel,   // VMEM_MUX
  input  logic      b_mac,     // MUX3 input 0
  input  logic      b_ndt,     // MUX3 input 1, bit of -(DCY+TH)
  input  logic      b_th,      // MUX3 input 2
  input  logic      cin,
  output logic      cout,
  input  logic      pe_de,     // disconnect FA sum from WBL
  input  logic      wbl_ext,   // value forced on WBL while PE_DE is high
  output logic      rbl,       // read bit line (FA input A)
  output logic      q_a,
  output logic      q_b
);

  logic b_op, s, wbl;

  always_comb begin
    rbl = (rwl[0] & q_a) | (rwl[1] & q_b);
    unique case (mux_sel)
      MUX_MAC:    b_op = b_mac;
      MUX_NEG_DT: b_op = b_ndt;
      MUX_TH:     b_op = b_th;
      default:    b_op = 1'b0;
    endcase
    s    = rbl ^ b_op ^ cin;
    cout = (rbl & b_op) | (rbl & cin) | (b_op & cin);
    wbl  = pe_de ? wbl_ext : s;
  end

  always_ff @(posedge clk) begin
    if (wwl[0]) q_a <= wbl;
    if (wwl[1]) q_b <= wbl;
  end

endmodule
