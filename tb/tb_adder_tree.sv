// tb_adder_tree: compares the 256-input adder tree with a sequential signed sum,
// for random operands and for the all-(-8) and all-(+7) extremes.
module tb_adder_tree;
  localparam int N = 256;
  logic [N-1:0][3:0] in;
  logic signed [11:0] sum;
  int checks = 0, failures = 0;

  adder_tree dut (.in(in), .sum(sum));

  task automatic check_now();
    int exp = 0;
    for (int j = 0; j < N; j++) exp += int'(signed'(in[j]));
    checks++;
    if (int'(sum) !== exp) begin
      failures++;
      $display("FAIL sum %0d expected %0d", sum, exp);
    end
  endtask

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int j = 0; j < N; j++) in[j] = 4'($urandom);
      #1 check_now();
    end
    for (int j = 0; j < N; j++) in[j] = 4'h8;
    #1 check_now();
    for (int j = 0; j < N; j++) in[j] = 4'h7;
    #1 check_now();
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
