// cim_buffer: operand buffer of the LD-LIF array (the "WBL driver & CIM buffer").
//
// When a time step is accepted (`load`), it captures the scaled MAC results of all
// neurons together with the layer's threshold TH and decay DCY, and forms the shared
// operand -(DCY+TH) with one adder and a negation. These registers feed the MUX3 inputs
// of every neuron for the three update cycles that follow, so the next time step's MAC
// can be computed while the current update is still running.
//
// Interface and timing: registers load at the rising edge when `load` is high and are
// cleared by the active-low reset. One DCY and one TH serve all neurons, as the paper
// shares one decay per layer. DCY may be negative (a potential that grows each step).
// Computing -(DCY+TH) here, and the registering itself, are this design's choices.
module cim_buffer #(
  parameter int unsigned LANES  = ldlif_pkg::N_BLOCKS,
  parameter int unsigned VMEM_W = ldlif_pkg::VMEM_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         load,
  input  logic [LANES-1:0][VMEM_W-1:0] mac_in,
  input  logic [VMEM_W-1:0]            dcy,
  input  logic [VMEM_W-1:0]            th,
  output logic [LANES-1:0][VMEM_W-1:0] mac_q,
  output logic [VMEM_W-1:0]            th_q,
  output logic [VMEM_W-1:0]            ndt_q    // -(DCY+TH)
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_q <= '0;
      th_q  <= '0;
      ndt_q <= '0;
    end else if (load) begin
      mac_q <= mac_in;
      th_q  <= th;
      ndt_q <= -(dcy + th);
    end
  end

endmodule
