// tb_vmem_bitcell: drives one membrane bit cell with random word lines, multiplexer
// selects, operand bits, carry and PE_DE, and checks the read bit line, the full-adder
// carry and the value written into each bank against a bit-level reference model.
module tb_vmem_bitcell;
  import ldlif_pkg::*;
  logic clk = 0;
  logic [1:0] wwl, rwl;
  vmem_mux_e mux_sel;
  logic b_mac, b_ndt, b_th, cin, cout, pe_de, wbl_ext, rbl, q_a, q_b;
  logic ea, eb;
  int checks = 0, failures = 0;

  vmem_bitcell dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic got, logic exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %b exp %b", what, got, exp); end
  endtask

  initial begin
    // initialise both banks through the write path
    @(negedge clk); wwl = 2'b11; rwl = 0; pe_de = 1; wbl_ext = 0; mux_sel = MUX_MAC;
    b_mac = 0; b_ndt = 0; b_th = 0; cin = 0;
    ea = 0; eb = 0;
    for (int t = 0; t < 2000; t++) begin
      logic r, b, s, w;
      @(negedge clk);
      chk(q_a, ea, "q_a"); chk(q_b, eb, "q_b");
      wwl = 2'($urandom); rwl = 2'(1 << ($urandom % 3)) & 2'b11;
      mux_sel = vmem_mux_e'($urandom % 3);
      b_mac = 1'($urandom); b_ndt = 1'($urandom); b_th = 1'($urandom); cin = 1'($urandom);
      pe_de = ($urandom % 4) == 0; wbl_ext = 1'($urandom);
      #1;
      r = (rwl[0] & ea) | (rwl[1] & eb);
      b = (mux_sel == MUX_MAC) ? b_mac : (mux_sel == MUX_NEG_DT) ? b_ndt : b_th;
      s = r ^ b ^ cin;
      chk(rbl, r, "rbl");
      chk(cout, (r + b + cin) > 1, "cout");
      w = pe_de ? wbl_ext : s;
      if (wwl[0]) ea = w;
      if (wwl[1]) eb = w;
    end
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
