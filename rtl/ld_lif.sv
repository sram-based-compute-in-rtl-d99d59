// ld_lif: the LD-LIF module, N neurons updated in place and in parallel.
//
// It joins the operand buffer, the word-line/multiplexer sequencer and N_NEUR membrane
// cells. All cells share the word lines, VMEM_MUX, SPIKE_EN, TH and -(DCY+TH); each has
// its own MAC operand. A time step is V <- V + MAC - DCY, then a spike and a reset to 0
// when that reaches TH, all in three cycles regardless of N_NEUR.
//
// Interface and timing: assert `start` with `mac_in`, `dcy` and `th` while `ready` is
// high; three cycles later `spike_valid` pulses with the step's spikes in `spikes`
// (registered at the end of the third cycle). `ready` is high again in that third cycle,
// so steps can be issued every 3 cycles. In idle, `v_we` loads `v_wdata` as the potential
// of every neuron. `vmem` shows each neuron's current potential (the bank holding it);
// it is meaningful between steps. The neuron array and its sharing follow the paper;
// the output register, the write port and `vmem` are this design's.
module ld_lif
  import ldlif_pkg::vmem_mux_e;
#(
  parameter int unsigned N_NEUR = ldlif_pkg::N_BLOCKS,
  parameter int unsigned VMEM_W = ldlif_pkg::VMEM_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [N_NEUR-1:0][VMEM_W-1:0] mac_in,
  input  logic [VMEM_W-1:0]             dcy,
  input  logic [VMEM_W-1:0]             th,
  input  logic                          v_we,
  input  logic [N_NEUR-1:0][VMEM_W-1:0] v_wdata,
  output logic                          ready,
  output logic                          spike_valid,
  output logic [N_NEUR-1:0]             spikes,
  output logic [N_NEUR-1:0][VMEM_W-1:0] vmem
);

  logic                          load, done, src_bank, spike_en, we;
  logic [1:0]                    wwl, rwl;
  vmem_mux_e                     mux_sel;
  logic [N_NEUR-1:0][VMEM_W-1:0] mac_q, q_a, q_b;
  logic [VMEM_W-1:0]             th_q, ndt_q;
  logic [N_NEUR-1:0]             spike;

  lif_sequencer u_seq (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (start),
    .v_we    (v_we),
    .ready   (ready),
    .load    (load),
    .done    (done),
    .src_bank(src_bank),
    .wwl     (wwl),
    .rwl     (rwl),
    .mux_sel (mux_sel),
    .spike_en(spike_en),
    .we      (we)
  );

  cim_buffer #(.LANES(N_NEUR), .VMEM_W(VMEM_W)) u_buf (
    .clk   (clk),
    .rst_n (rst_n),
    .load  (load),
    .mac_in(mac_in),
    .dcy   (dcy),
    .th    (th),
    .mac_q (mac_q),
    .th_q  (th_q),
    .ndt_q (ndt_q)
  );

  for (genvar n = 0; n < N_NEUR; n++) begin : g_neur
    vmem_neuron #(.VMEM_W(VMEM_W)) u_neur (
      .clk     (clk),
      .wwl     (wwl),
      .rwl     (rwl),
      .mux_sel (mux_sel),
      .mac     (mac_q[n]),
      .ndt     (ndt_q),
      .th      (th_q),
      .spike_en(spike_en),
      .we      (we),
      .wdata   (v_wdata[n]),
      .spike   (spike[n]),
      .q_a     (q_a[n]),
      .q_b     (q_b[n])
    );
    assign vmem[n] = src_bank ? q_b[n] : q_a[n];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spike_valid <= 1'b0;
      spikes      <= '0;
    end else begin
      spike_valid <= done;
      if (done) spikes <= spike;
    end
  end

endmodule
