// tb_mac_block: fills one 256-row block with random signed weights, applies random spike
// vectors (plus all-ones and all-zeros) and compares the result with sum W[r]*IN[r].
// Rewrites one row afterwards to check that only that row changes.
module tb_mac_block;
  localparam int N = 256;
  logic clk = 0;
  logic [N-1:0] wl, inb;
  logic [3:0] bl;
  logic signed [11:0] mac;
  logic [3:0] w [N];
  int checks = 0, failures = 0;

  mac_block dut (.clk(clk), .wl(wl), .bl(bl), .inb(inb), .mac(mac));

  always #5 clk = ~clk;

  task automatic check_vec(logic [N-1:0] in);
    int exp = 0;
    inb = ~in;
    #1;
    for (int r = 0; r < N; r++) if (in[r]) exp += int'(signed'(w[r]));
    checks++;
    if (int'(mac) !== exp) begin
      failures++;
      $display("FAIL mac %0d expected %0d", mac, exp);
    end
  endtask

  initial begin
    wl = '0; inb = '1; bl = '0;
    for (int r = 0; r < N; r++) begin
      w[r] = 4'($urandom);
      @(negedge clk); wl = '0; wl[r] = 1'b1; bl = w[r];
    end
    @(negedge clk); wl = '0;
    for (int t = 0; t < 100; t++) begin
      logic [N-1:0] v;
      for (int r = 0; r < N; r++) v[r] = 1'($urandom);
      check_vec(v);
    end
    check_vec('1);
    check_vec('0);
    w[17] = w[17] + 4'd3;
    @(negedge clk); wl[17] = 1'b1; bl = w[17];
    @(negedge clk); wl = '0;
    check_vec('1);
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
