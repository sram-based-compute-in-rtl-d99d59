// tb_scaler: checks shift-and-saturate for every 12-bit input value and every shift.
module tb_scaler;
  localparam int L = 32;
  logic [L-1:0][11:0] mac;
  logic [1:0] shift;
  logic [L-1:0][9:0] scaled;
  int checks = 0, failures = 0;
  int sat_hi = 0, sat_lo = 0;

  scaler dut (.mac(mac), .shift(shift), .scaled(scaled));

  initial begin
    for (int s = 0; s < 4; s++) begin
      shift = 2'(s);
      for (int base = -2048; base < 2048; base += L) begin
        for (int i = 0; i < L; i++) mac[i] = 12'(base + i);
        #1;
        for (int i = 0; i < L; i++) begin
          automatic int v = base + i;
          automatic int q = (v >= 0) ? v / (1 << s) : -((-v + (1 << s) - 1) / (1 << s));
          if (q > 511) begin q = 511; sat_hi++; end
          if (q < -512) begin q = -512; sat_lo++; end
          checks++;
          if (int'(signed'(scaled[i])) !== q) begin
            failures++;
            if (failures < 10) $display("FAIL in %0d shift %0d: %0d expected %0d", v, s, signed'(scaled[i]), q);
          end
        end
      end
    end
    if (sat_hi == 0 || sat_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
