// tb_lif_sequencer: checks the word-line, multiplexer and SPIKE_EN pattern of each of the
// three update cycles, the bank swap after every step, back-to-back starts (one step
// every 3 cycles), the write mode in idle, and the start-to-done latency of 3 cycles.
module tb_lif_sequencer;
  import ldlif_pkg::*;
  logic clk = 0, rst_n = 1;
  logic start, v_we, ready, load, done, src_bank, spike_en, we;
  logic [1:0] wwl, rwl;
  vmem_mux_e mux_sel;
  int checks = 0, failures = 0;

  lif_sequencer dut (.*);

  always #5 clk = ~clk;

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  function automatic logic [1:0] bank(logic b); return b ? 2'b10 : 2'b01; endfunction

  // Expect the three update cycles with source bank `s`; `next` = start during C3.
  task automatic expect_step(logic s, logic next);
    // C1
    @(negedge clk); start = 0;
    chk(rwl, bank(s), "C1 rwl"); chk(wwl, bank(~s), "C1 wwl");
    chk(mux_sel, MUX_MAC, "C1 mux"); chk(spike_en, 0, "C1 spike_en"); chk(ready, 0, "C1 ready");
    @(negedge clk);
    chk(rwl, bank(~s), "C2 rwl"); chk(wwl, bank(s), "C2 wwl");
    chk(mux_sel, MUX_NEG_DT, "C2 mux"); chk(spike_en, 0, "C2 spike_en");
    @(negedge clk);
    chk(rwl, bank(s), "C3 rwl"); chk(wwl, bank(~s), "C3 wwl");
    chk(mux_sel, MUX_TH, "C3 mux"); chk(spike_en, 1, "C3 spike_en");
    chk(done, 1, "C3 done"); chk(ready, 1, "C3 ready");
    start = next;
    #1 chk(load, next, "load in C3");
  endtask

  initial begin
    #1 rst_n = 0;
    start = 0; v_we = 0;
    @(negedge clk); rst_n = 1;
    chk(src_bank, 0, "reset bank A");
    // write mode in idle
    v_we = 1; #1;
    chk(we, 1, "we"); chk(wwl, 2'b01, "write to A"); chk(rwl, 0, "no read in write");
    @(negedge clk); v_we = 0;
    #1 chk(we, 0, "we off");
    // single step
    start = 1; #1 chk(load, 1, "load");
    expect_step(0, 0);
    @(negedge clk);
    chk(src_bank, 1, "swap to B"); chk(ready, 1, "idle ready"); chk(done, 0, "idle not done");
    chk(rwl, 0, "idle rwl"); chk(wwl, 0, "idle wwl");
    // write goes to the bank now holding the potential
    v_we = 1; #1 chk(wwl, 2'b10, "write to B");
    @(negedge clk); v_we = 0;
    // back to back: 4 steps, one every 3 cycles
    start = 1;
    for (int k = 0; k < 4; k++) expect_step(1 ^ (k & 1), k < 3);
    @(negedge clk);
    chk(src_bank, 1, "after 5 steps bank B");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
