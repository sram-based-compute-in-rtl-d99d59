// tb_workload_output_layer: runs the 128-input, 10-neuron output layer that ends both
// evaluated MLPs (2312-256-128-10 and 140-128-128-128-10) on the full-size design, for
// 100 time steps each, back to back.
//
// Run 1 uses 3-bit weights (-4..3) and a positive decay, as the N-MNIST network does;
// run 2 uses 4-bit weights and a negative decay (the potential rises every step), as
// learned for the SHD network. Rows 128..255 and neurons 10..31 hold zero weights, as
// an unused part of the array would. Input spikes are random with a rate that varies over
// time. A reference model checks the spikes and potentials of all 32 neurons after every
// step; the issue rate of one step per 3 cycles is checked over the whole run.
module tb_workload_output_layer;
  localparam int NB = 32, NR = 256, N_IN = 128, N_OUT = 10, STEPS = 100;
  logic clk = 0, rst_n = 1;
  logic w_we, v_we, start, ready, spike_valid;
  logic [7:0] w_row;
  logic [NB-1:0][3:0] w_data;
  logic [NB-1:0][9:0] v_wdata, vmem;
  logic [NR-1:0] in_spk;
  logic [1:0] shift;
  logic [9:0] dcy, th;
  logic [NB-1:0] spikes;

  int wt [NR][NB];
  int ref_v [NB];
  logic [NB-1:0] exp_q [$];
  int checks = 0, failures = 0, out_spikes = 0;

  ldlif_cim_top dut (.*);

  always #5 clk = ~clk;

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic int s10(int v); return int'(signed'(10'(v))); endfunction

  function automatic logic [NB-1:0] ref_step();
    logic [NB-1:0] sp;
    int d = s10(int'(dcy)), t = int'(th), sh = int'(shift);
    for (int b = 0; b < NB; b++) begin
      int m = 0, q, vp;
      for (int r = 0; r < NR; r++) if (in_spk[r]) m += wt[r][b];
      q = (m >= 0) ? m / (1 << sh) : -((-m + (1 << sh) - 1) / (1 << sh));
      if (q > 511) q = 511;
      if (q < -512) q = -512;
      vp = s10(s10(ref_v[b] + q) + s10(-(d + t)));
      sp[b] = vp >= 0;
      ref_v[b] = sp[b] ? 0 : s10(vp + t);
    end
    return sp;
  endfunction

  task automatic run_layer(int wmin, int wspan, int decay, int thr, int sh);
    int issued = 0, got = 0, cyc = 0, first = 0, last = 0;
    for (int r = 0; r < NR; r++)
      for (int b = 0; b < NB; b++)
        wt[r][b] = (r < N_IN && b < N_OUT) ? wmin + int'($urandom % wspan) : 0;
    for (int r = 0; r < NR; r++) begin
      @(negedge clk);
      w_we = 1; w_row = 8'(r);
      for (int b = 0; b < NB; b++) w_data[b] = 4'(wt[r][b]);
    end
    @(negedge clk); w_we = 0;
    for (int b = 0; b < NB; b++) begin ref_v[b] = 0; v_wdata[b] = '0; end
    v_we = 1; @(negedge clk); v_we = 0;
    dcy = 10'(decay); th = 10'(thr); shift = 2'(sh);
    // issue STEPS steps as fast as `ready` allows and collect the spikes
    while (got < STEPS) begin
      if (issued < STEPS) begin
        // input rate swings between about 5% and 45% over the run
        int rate = 25 + 20 * ((((issued / 25) % 2) != 0) ? 1 : -1);
        for (int r = 0; r < NR; r++) in_spk[r] = (r < N_IN) && (int'($urandom % 100) < rate);
        start = 1;
      end else start = 0;
      #1;
      if (start && ready) begin
        exp_q.push_back(ref_step());
        if (issued == 0) first = cyc;
        issued++;
      end
      @(negedge clk); cyc++;
      if (spike_valid) begin
        logic [NB-1:0] e = exp_q.pop_front();
        chk(spikes, e, "spikes");
        for (int b = 0; b < N_OUT; b++) out_spikes += int'(spikes[b]);
        got++;
        last = cyc;
      end
    end
    start = 0;
    for (int b = 0; b < NB; b++) chk(s10(int'(vmem[b])), ref_v[b], "final vmem");
    chk(last - first, 3 * STEPS + 1, "cycles for all steps");
  endtask

  initial begin
    #1 rst_n = 0;
    w_we = 0; v_we = 0; start = 0; w_row = 0; w_data = '0; v_wdata = '0;
    in_spk = '0; shift = 0; dcy = 0; th = 100;
    @(negedge clk); rst_n = 1;
    run_layer(-4, 8, 6, 40, 0);     // 3-bit weights, positive decay
    $display("run 1 output spikes %0d", out_spikes);
    if (out_spikes == 0) begin failures++; $display("FAIL no output spike in run 1"); end
    out_spikes = 0;
    run_layer(-8, 16, -2, 60, 1);   // 4-bit weights, negative decay
    $display("run 2 output spikes %0d", out_spikes);
    if (out_spikes == 0) begin failures++; $display("FAIL no output spike in run 2"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
