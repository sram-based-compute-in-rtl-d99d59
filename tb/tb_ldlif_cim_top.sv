// tb_ldlif_cim_top: end-to-end test of the accelerator at its full size (32 neurons,
// 256 inputs, 4-bit weights, 10-bit potentials), with no parameter overridden.
//
// It writes the whole weight array, loads initial potentials, and runs time steps with
// random spike vectors, scaler shifts, decays (including negative ones) and thresholds.
// A reference model computes each step independently: the synaptic sums from the
// weight table, the shift with saturation, and V <- V + MAC - DCY with spike and reset at
// TH in 10-bit wrap-around arithmetic. Spikes and potentials are compared after every
// step, the step latency and the 3-cycle issue rate are checked, and one weight row is
// rewritten mid-run. Each mechanism (spike/reset, no-spike restore by +TH, scaler
// saturation, negative decay, back-to-back steps, potential write, steps starting from
// either bank, weight rewrite) is counted and must occur at least once.
module tb_ldlif_cim_top;
  localparam int NB = 32, NR = 256;
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
  int checks = 0, failures = 0;
  int n_spk = 0, n_nospk = 0, n_sat = 0, n_negdcy = 0, n_b2b = 0, n_write = 0;
  int n_bank_a = 0, n_bank_b = 0, n_wrewrite = 0;
  int steps_done = 0;

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

  task automatic write_row(int r);
    @(negedge clk);
    w_we = 1; w_row = 8'(r);
    for (int b = 0; b < NB; b++) w_data[b] = 4'(wt[r][b]);
    @(negedge clk);
    w_we = 0;
  endtask

  // Randomise the step operands and return the expected spikes, updating ref_v.
  function automatic logic [NB-1:0] next_step(int density);
    logic [NB-1:0] sp;
    int d, t, sh;
    for (int r = 0; r < NR; r++) in_spk[r] = int'($urandom % 100) < density;
    shift = 2'($urandom);
    dcy   = 10'(int'($urandom % 40) - 12);
    th    = 10'($urandom % 300 + 30);
    d = s10(int'(dcy)); t = int'(th); sh = int'(shift);
    if (d < 0) n_negdcy++;
    for (int b = 0; b < NB; b++) begin
      int m = 0, q, vmid, vp;
      for (int r = 0; r < NR; r++) if (in_spk[r]) m += wt[r][b];
      q = (m >= 0) ? m / (1 << sh) : -((-m + (1 << sh) - 1) / (1 << sh));
      if (q > 511 || q < -512) n_sat++;
      if (q > 511) q = 511;
      if (q < -512) q = -512;
      vmid = s10(ref_v[b] + q);
      vp   = s10(vmid + s10(-(d + t)));
      sp[b] = vp >= 0;
      ref_v[b] = sp[b] ? 0 : s10(vp + t);
      if (sp[b]) n_spk++; else n_nospk++;
    end
    return sp;
  endfunction

  task automatic check_state(logic [NB-1:0] exp_sp, string what);
    chk(spike_valid, 1, {what, " valid"});
    chk(spikes, exp_sp, {what, " spikes"});
    for (int b = 0; b < NB; b++) chk(s10(int'(vmem[b])), ref_v[b], {what, " vmem"});
  endtask

  initial begin
    logic [NB-1:0] sp1, sp2;
    logic bank;
    int cyc;
    #1 rst_n = 0;
    w_we = 0; v_we = 0; start = 0; w_row = 0; w_data = '0; v_wdata = '0;
    in_spk = '0; shift = 0; dcy = 0; th = 100;
    for (int r = 0; r < NR; r++)
      for (int b = 0; b < NB; b++)
        // columns 0 and 1 carry large same-sign weights so their sums overflow 10 bits
        wt[r][b] = (b == 0) ? 7 : (b == 1) ? -8 : int'($urandom % 16) - 8;
    @(negedge clk); rst_n = 1;
    for (int r = 0; r < NR; r++) write_row(r);
    bank = 0;
    for (int s = 0; s < 40; s++) begin
      if (s % 10 == 0) begin
        // load fresh potentials in write mode
        for (int b = 0; b < NB; b++) begin
          ref_v[b] = int'($urandom % 300) - 150;
          v_wdata[b] = 10'(ref_v[b]);
        end
        @(negedge clk); v_we = 1;
        @(negedge clk); v_we = 0;
        for (int b = 0; b < NB; b++) chk(s10(int'(vmem[b])), ref_v[b], "written vmem");
        n_write++;
      end
      if (s == 20) begin
        // rewrite one weight row; later steps must use it
        for (int b = 0; b < NB; b++) wt[5][b] = -wt[5][b] / 2;
        write_row(5);
        n_wrewrite++;
      end
      if (bank) n_bank_b++; else n_bank_a++;
      sp1 = next_step(int'($urandom % 60) + 2);
      start = 1;
      #1 chk(ready, 1, "ready");
      @(negedge clk); start = 0; in_spk = '0;
      cyc = 1;
      while (!spike_valid && cyc < 10) begin @(negedge clk); cyc++; end
      chk(cyc, 4, "start-to-spike latency");
      check_state(sp1, "single");
      bank = ~bank;
      steps_done++;
      if (s % 2 == 1) begin
        // two steps issued back to back, 3 cycles apart
        if (bank) n_bank_b++; else n_bank_a++;
        sp1 = next_step(int'($urandom % 60) + 2);
        start = 1; @(negedge clk); start = 0;  // C1
        @(negedge clk);                         // C2
        @(negedge clk);                         // C3
        chk(ready, 1, "ready in third cycle");
        bank = ~bank;
        if (bank) n_bank_b++; else n_bank_a++;
        sp2 = next_step(int'($urandom % 60) + 2);
        start = 1; @(negedge clk); start = 0;
        chk(spikes, sp1, "b2b first spikes");
        chk(spike_valid, 1, "b2b first valid");
        @(negedge clk); @(negedge clk); @(negedge clk);
        check_state(sp2, "b2b second");
        bank = ~bank;
        steps_done += 2;
        n_b2b++;
      end
    end
    $display("steps %0d spikes %0d no-spikes %0d saturations %0d negative-dcy %0d",
             steps_done, n_spk, n_nospk, n_sat, n_negdcy);
    $display("back-to-back %0d potential-writes %0d from-bank-A %0d from-bank-B %0d weight-rewrites %0d",
             n_b2b, n_write, n_bank_a, n_bank_b, n_wrewrite);
    if (n_spk == 0)      begin failures++; $display("FAIL no spike happened"); end
    if (n_nospk == 0)    begin failures++; $display("FAIL no non-spiking update happened"); end
    if (n_sat == 0)      begin failures++; $display("FAIL scaler never saturated"); end
    if (n_negdcy == 0)   begin failures++; $display("FAIL no negative decay"); end
    if (n_b2b == 0)      begin failures++; $display("FAIL no back-to-back steps"); end
    if (n_write == 0)    begin failures++; $display("FAIL no potential write"); end
    if (n_bank_a == 0 || n_bank_b == 0) begin failures++; $display("FAIL one bank never the source"); end
    if (n_wrewrite == 0) begin failures++; $display("FAIL no weight rewrite"); end
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
