// tb_vmem_neuron: runs the three-cycle update on one 10-bit neuron by driving the word
// lines and VMEM_MUX directly, starting from bank A as in the cell description.
// It checks the two worked cases of the paper's operating example (Vinit = 98 and 108
// with MAC = 100, DCY = 10, TH = 190) and then random operands, comparing the
// intermediate values, the spike and the final value with 10-bit wrap-around arithmetic.
module tb_vmem_neuron;
  import ldlif_pkg::*;
  logic clk = 0;
  logic [1:0] wwl, rwl;
  vmem_mux_e mux_sel;
  logic [9:0] mac, ndt, th, wdata, q_a, q_b;
  logic spike_en, we, spike;
  int checks = 0, failures = 0, n_spike = 0, n_nospike = 0;

  vmem_neuron dut (.*);

  always #5 clk = ~clk;

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  function automatic logic [9:0] w10(int v); return 10'(v); endfunction

  task automatic step(int vinit, int m, int d, int t);
    logic [9:0] vmid, vp, vf;
    logic sp;
    vmid = w10(vinit + m);
    vp   = w10(int'(vmid) - d - t);
    sp   = ~vp[9];
    vf   = sp ? 10'd0 : w10(int'(vp) + t);
    // write mode: Vinit into VMEM_A
    @(negedge clk);
    we = 1; wdata = w10(vinit); wwl = 2'b01; rwl = 0; spike_en = 0;
    mac = w10(m); th = w10(t); ndt = w10(-(d + t));
    // cycle 1: A + MAC -> B
    @(negedge clk);
    we = 0; wwl = 2'b10; rwl = 2'b01; mux_sel = MUX_MAC;
    // cycle 2: B - (DCY+TH) -> A
    @(negedge clk);
    chk(q_b, vmid, "Vmid in B");
    wwl = 2'b01; rwl = 2'b10; mux_sel = MUX_NEG_DT;
    // cycle 3: A (+TH or reset) -> B
    @(negedge clk);
    chk(q_a, vp, "V'mid in A");
    wwl = 2'b10; rwl = 2'b01; mux_sel = MUX_TH; spike_en = 1;
    #1 chk(spike, sp, "spike");
    if (spike) n_spike++; else n_nospike++;
    @(negedge clk);
    wwl = 0; rwl = 0; spike_en = 0;
    chk(q_b, vf, "Vfinal in B");
    chk(q_a, vp, "A keeps V'mid");
    #1 chk(spike, 0, "no spike outside cycle 3");
  endtask

  initial begin
    wwl = 0; rwl = 0; mux_sel = MUX_MAC; mac = 0; ndt = 0; th = 0; wdata = 0;
    spike_en = 0; we = 0;
    step(98, 100, 10, 190);   // V'mid = -2: no spike, Vfinal = 188
    chk(q_b, 188, "example Vinit=98");
    step(108, 100, 10, 190);  // V'mid = 8: spike, Vfinal = 0
    chk(q_b, 0, "example Vinit=108");
    for (int i = 0; i < 300; i++) begin
      automatic int v = int'($urandom % 400) - 100;
      automatic int m = int'($urandom % 200) - 100;
      automatic int d = int'($urandom % 40) - 10;
      automatic int t = int'($urandom % 200) + 1;
      step(v, m, d, t);
    end
    if (n_spike == 0 || n_nospike == 0) failures++;
    $display("spikes %0d no-spikes %0d", n_spike, n_nospike);
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
