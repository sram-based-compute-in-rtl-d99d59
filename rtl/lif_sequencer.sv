// lif_sequencer: word-line and multiplexer driver of the LD-LIF array.
//
// It runs the three-cycle, ping-pong membrane update for all neurons at once. Let SRC be
// the bank holding the current potential (VMEM_A after reset) and DST the other one:
//   C1: read SRC, VMEM_MUX = 0 (MAC),      write DST   Vmid  = V + MAC
//   C2: read DST, VMEM_MUX = 1 (-(DCY+TH)), write SRC   V'mid = Vmid - (DCY+TH)
//   C3: read SRC, VMEM_MUX = 2 (TH),       write DST,  SPIKE_EN high   Vfinal
// After C3 the new potential is in DST, so the two banks swap roles for the next step.
// In IDLE, a write request (`v_we`) raises the write word line of SRC and WE, loading
// initial potentials.
//
// Interface and timing: `start` is taken when `ready` is high, which is in IDLE and in
// C3, so time steps can follow each other every 3 cycles. `load` pulses in the cycle a
// start is taken (the operand buffer then captures that step's MAC). `done` is high in
// C3, the cycle whose spikes are valid. A write is taken only in IDLE when no start is.
// The C1..C3 read/write/mux sequence and SPIKE_EN in C3 follow the paper's waveform; the
// bank swap between steps, the back-to-back start and the write mode are this design's.
module lif_sequencer
  import ldlif_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  logic      v_we,
  output logic      ready,
  output logic      load,
  output logic      done,
  output logic      src_bank,   // bank holding the current potential (0 = A, 1 = B)
  output logic [1:0] wwl,
  output logic [1:0] rwl,
  output vmem_mux_e mux_sel,
  output logic      spike_en,
  output logic      we
);

  typedef enum logic [1:0] {S_IDLE, S_C1, S_C2, S_C3} state_e;
  state_e state_q, state_d;
  logic   src_q;

  assign ready = (state_q == S_IDLE) || (state_q == S_C3);
  assign load  = ready && start;
  assign done  = (state_q == S_C3);
  assign src_bank = src_q;

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S_IDLE: if (start) state_d = S_C1;
      S_C1:   state_d = S_C2;
      S_C2:   state_d = S_C3;
      S_C3:   state_d = start ? S_C1 : S_IDLE;
      default: state_d = S_IDLE;
    endcase
  end

  always_comb begin
    wwl      = '0;
    rwl      = '0;
    mux_sel  = MUX_MAC;
    spike_en = 1'b0;
    we       = 1'b0;
    unique case (state_q)
      S_IDLE: if (v_we && !start) begin
        we          = 1'b1;
        wwl[src_q]  = 1'b1;
      end
      S_C1: begin
        rwl[src_q]  = 1'b1;
        wwl[~src_q] = 1'b1;
        mux_sel     = MUX_MAC;
      end
      S_C2: begin
        rwl[~src_q] = 1'b1;
        wwl[src_q]  = 1'b1;
        mux_sel     = MUX_NEG_DT;
      end
      S_C3: begin
        rwl[src_q]  = 1'b1;
        wwl[~src_q] = 1'b1;
        mux_sel     = MUX_TH;
        spike_en    = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      src_q   <= 1'b0;
    end else begin
      state_q <= state_d;
      if (state_q == S_C3) src_q <= ~src_q;
    end
  end

  // A read and a write never target the same bank in one cycle.
  assert property (@(posedge clk) disable iff (!rst_n) (rwl & wwl & {2{~we}}) == 2'b00);
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(rwl) && $onehot0(wwl));

endmodule
