// scaler: aligns the 12-bit MAC results to the 10-bit membrane-potential scale.
//
// Each lane is shifted right arithmetically by `shift` bits (0 to 3) and then
// saturated to the signed OUT_W range, so the value handed to the neuron is
// round-toward-minus-infinity(mac / 2^shift), clipped to [-2^(OUT_W-1), 2^(OUT_W-1)-1].
// With shift = 2 a 12-bit result fits exactly and never saturates.
//
// Interface and timing: combinational, all lanes in parallel. The paper states only that
// the scaler aligns the MAC output with the 10-bit VMEM; the power-of-two shift and the
// saturation are this design's choice of the simplest circuit doing that.
module scaler #(
  parameter int unsigned LANES = ldlif_pkg::N_BLOCKS,
  parameter int unsigned IN_W  = ldlif_pkg::MAC_W,
  parameter int unsigned OUT_W = ldlif_pkg::VMEM_W
) (
  input  logic [LANES-1:0][IN_W-1:0]  mac,
  input  logic [1:0]                  shift,
  output logic [LANES-1:0][OUT_W-1:0] scaled
);

  localparam logic signed [IN_W-1:0] MAX_V = IN_W'((1 << (OUT_W - 1)) - 1);
  localparam logic signed [IN_W-1:0] MIN_V = -IN_W'(1 << (OUT_W - 1));

  always_comb begin
    for (int i = 0; i < int'(LANES); i++) begin
      logic signed [IN_W-1:0] sh;
      sh = signed'(mac[i]) >>> shift;
      if (sh > MAX_V)      scaled[i] = MAX_V[OUT_W-1:0];
      else if (sh < MIN_V) scaled[i] = MIN_V[OUT_W-1:0];
      else                 scaled[i] = sh[OUT_W-1:0];
    end
  end

endmodule
