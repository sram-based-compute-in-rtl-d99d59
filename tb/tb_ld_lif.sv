// tb_ld_lif: runs the 32-neuron LD-LIF array for many time steps against a reference
// model of V <- V + MAC - DCY, spike and reset at TH (10-bit wrap-around arithmetic).
// It loads initial potentials in write mode, issues steps both with idle gaps and back
// to back, checks spikes and potentials after every step, and checks that spike_valid
// comes 3 cycles after the step is accepted and that back-to-back steps take 3 cycles.
module tb_ld_lif;
  localparam int N = 32;
  logic clk = 0, rst_n = 1;
  logic start, v_we, ready, spike_valid;
  logic [N-1:0][9:0] mac_in, v_wdata, vmem;
  logic [9:0] dcy, th;
  logic [N-1:0] spikes;
  int ref_v [N];
  int checks = 0, failures = 0;
  int n_spk = 0, n_nospk = 0, n_b2b = 0, n_write = 0, n_negdcy = 0;

  ld_lif dut (.*);

  always #5 clk = ~clk;

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  function automatic int s10(int v); return int'(signed'(10'(v))); endfunction

  // Reference update of every neuron; returns the expected spike vector.
  function automatic logic [N-1:0] ref_step(int d, int t);
    logic [N-1:0] sp;
    for (int i = 0; i < N; i++) begin
      int vmid = s10(ref_v[i] + s10(int'(mac_in[i])));
      int vp   = s10(vmid + s10(-(d + t)));
      sp[i] = vp >= 0;
      ref_v[i] = sp[i] ? 0 : s10(vp + t);
    end
    return sp;
  endfunction

  task automatic drive_operands();
    for (int i = 0; i < N; i++) mac_in[i] = 10'(int'($urandom % 120) - 40);
    dcy = 10'(int'($urandom % 30) - 8);
    th  = 10'($urandom % 150 + 20);
  endtask

  initial begin
    logic [N-1:0] exp_sp;
    int d, t, cyc;
    #1 rst_n = 0;
    start = 0; v_we = 0; mac_in = '0; dcy = 0; th = 0;
    for (int i = 0; i < N; i++) v_wdata[i] = 10'(int'($urandom % 200) - 100);
    @(negedge clk); rst_n = 1;
    @(negedge clk);
    v_we = 1;
    @(negedge clk); v_we = 0; n_write++;
    for (int i = 0; i < N; i++) begin ref_v[i] = s10(int'(v_wdata[i])); chk(s10(int'(vmem[i])), ref_v[i], "written"); end
    for (int s = 0; s < 60; s++) begin
      logic b2b;
      b2b = (s % 3) != 0;
      drive_operands();
      d = s10(int'(dcy)); t = int'(th);
      if (d < 0) n_negdcy++;
      exp_sp = ref_step(d, t);
      start = 1;
      #1 chk(ready, 1, "ready for start");
      @(negedge clk); start = 0;
      cyc = 1;
      while (!spike_valid) begin @(negedge clk); cyc++; end
      chk(cyc, 4, "start to spike_valid");   // 3 update cycles + output register
      chk(spikes, exp_sp, "spikes");
      for (int i = 0; i < N; i++) begin
        if (exp_sp[i]) n_spk++; else n_nospk++;
        chk(s10(int'(vmem[i])), ref_v[i], "vmem");
      end
      @(negedge clk);
      chk(spike_valid, 0, "valid is a pulse");
      chk(spikes, exp_sp, "spikes held after the pulse");
      if (b2b) begin
        // back-to-back pair: the second start is issued in the third update cycle
        logic [N-1:0] sp1, sp2;
        drive_operands(); d = s10(int'(dcy)); t = int'(th);
        sp1 = ref_step(d, t);
        start = 1; @(negedge clk);  // C1
        drive_operands(); start = 0;
        @(negedge clk);             // C2
        @(negedge clk);             // C3: ready again
        chk(ready, 1, "ready in C3");
        d = s10(int'(dcy)); t = int'(th);
        start = 1;
        @(negedge clk); start = 0;  // C1 of second step, first step's spikes valid
        chk(spike_valid, 1, "valid after 3 cycles");
        chk(spikes, sp1, "b2b spikes 1");
        sp2 = ref_step(d, t);
        @(negedge clk); @(negedge clk);  // C2, C3
        @(negedge clk);
        chk(spike_valid, 1, "second valid 3 cycles later");
        chk(spikes, sp2, "b2b spikes 2");
        for (int i = 0; i < N; i++) chk(s10(int'(vmem[i])), ref_v[i], "b2b vmem");
        n_b2b++;
      end
    end
    $display("spikes %0d no-spikes %0d back-to-back %0d writes %0d negative-dcy %0d",
             n_spk, n_nospk, n_b2b, n_write, n_negdcy);
    if (n_spk == 0 || n_nospk == 0 || n_b2b == 0 || n_negdcy == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
