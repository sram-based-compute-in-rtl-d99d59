// tb_cim_buffer: checks that the buffer captures MAC, TH and -(DCY+TH) only on `load`,
// holds them otherwise, and clears on reset.
module tb_cim_buffer;
  localparam int L = 32;
  logic clk = 0, rst_n = 1, load = 0;
  logic [L-1:0][9:0] mac_in, mac_q, e_mac;
  logic [9:0] dcy, th, th_q, ndt_q, e_th, e_ndt;
  int checks = 0, failures = 0;

  cim_buffer dut (.*);

  always #5 clk = ~clk;

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    #1 rst_n = 0;
    mac_in = '0; dcy = 0; th = 0;
    #1 chk(th_q, 0, "reset th"); chk(ndt_q, 0, "reset ndt");
    @(negedge clk); rst_n = 1;
    e_mac = '0; e_th = 0; e_ndt = 0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      load = 1'($urandom);
      for (int i = 0; i < L; i++) mac_in[i] = 10'($urandom);
      dcy = 10'(int'($urandom % 100) - 30); th = 10'($urandom % 300);
      if (load) begin
        e_mac = mac_in; e_th = th; e_ndt = 10'(-(int'(signed'(dcy)) + int'(th)));
      end
      @(negedge clk);
      load = 0;
      chk(th_q, e_th, "th");
      chk(ndt_q, e_ndt, "-(dcy+th)");
      for (int i = 0; i < L; i++) chk(mac_q[i], e_mac[i], "mac");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
