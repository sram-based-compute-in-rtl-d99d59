// tb_cim_mac: writes the full 32 x 256 weight array row by row with random weights and
// checks all 32 synaptic sums for random spike vectors against a reference model.
module tb_cim_mac;
  localparam int NB = 32, NR = 256;
  logic clk = 0;
  logic w_we;
  logic [7:0] w_row;
  logic [NB-1:0][3:0] w_data;
  logic [NR-1:0] in_spk;
  logic [NB-1:0][11:0] mac;
  logic [3:0] w [NR][NB];
  int checks = 0, failures = 0;

  cim_mac dut (.clk(clk), .w_we(w_we), .w_row(w_row), .w_data(w_data), .in_spk(in_spk), .mac(mac));

  always #5 clk = ~clk;

  initial begin
    w_we = 0; w_row = 0; w_data = '0; in_spk = '0;
    for (int r = 0; r < NR; r++) begin
      for (int b = 0; b < NB; b++) w[r][b] = 4'($urandom);
      @(negedge clk);
      w_we = 1; w_row = 8'(r);
      for (int b = 0; b < NB; b++) w_data[b] = w[r][b];
    end
    @(negedge clk); w_we = 0;
    for (int t = 0; t < 50; t++) begin
      for (int r = 0; r < NR; r++) in_spk[r] = ($urandom % 4) == 0;
      if (t == 0) in_spk = '1;
      #1;
      for (int b = 0; b < NB; b++) begin
        automatic int exp = 0;
        for (int r = 0; r < NR; r++) if (in_spk[r]) exp += int'(signed'(w[r][b]));
        checks++;
        if (int'(signed'(mac[b])) !== exp) begin
          failures++;
          $display("FAIL block %0d: %0d expected %0d", b, signed'(mac[b]), exp);
        end
      end
      @(negedge clk);
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
