// tb_wl_driver: every address must raise exactly its own word line while writing,
// and no word line may be high without a write.
module tb_wl_driver;
  logic we;
  logic [7:0] addr;
  logic [255:0] wl;
  int checks = 0, failures = 0;

  wl_driver dut (.we(we), .addr(addr), .wl(wl));

  initial begin
    for (int a = 0; a < 256; a++) begin
      we = 1; addr = 8'(a);
      #1 checks++;
      if (wl !== (256'(1) << a)) begin failures++; $display("FAIL addr %0d", a); end
      we = 0;
      #1 checks++;
      if (wl !== '0) begin failures++; $display("FAIL idle addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
