// ldlif_pkg: sizes and encodings shared by the linear-decay LIF compute-in-memory
// accelerator.
//
// The array sizes follow the architecture description: a MAC array of 32 blocks, each
// 256 rows of 4-bit weights, 12-bit adder-tree results, and an LD-LIF array of 32 neurons
// holding 10-bit membrane potentials. The VMEM_MUX select codes 0/1/2 (MAC, -(DCY+TH),
// TH) are the MUX3 input numbers printed in the cell schematic. Treating weights,
// MAC results and membrane potentials as two's-complement numbers is this design's choice.
package ldlif_pkg;

  localparam int unsigned N_BLOCKS = 32;   // MAC blocks = LD-LIF neurons
  localparam int unsigned N_ROWS   = 256;  // synapse rows / binary inputs per block
  localparam int unsigned W_BITS   = 4;    // weight width
  localparam int unsigned MAC_W    = 12;   // adder-tree output width
  localparam int unsigned VMEM_W   = 10;   // membrane potential width

  // MUX3 select of the processing element (B operand of the full-adder chain).
  typedef enum logic [1:0] {
    MUX_MAC    = 2'd0,   // add the scaled MAC result
    MUX_NEG_DT = 2'd1,   // add -(DCY+TH)
    MUX_TH     = 2'd2    // add TH back
  } vmem_mux_e;

endpackage
