// tb_cim_adder_tree: drives the 32-input, 8-bit adder tree with random signed
// products (plus the all-max and all-min corners) and compares the 13-bit sum
// with a sum computed in the testbench.
module tb_cim_adder_tree;
  localparam int N = 32, W = 8;
  logic signed [W-1:0]  in [N];
  logic signed [W+4:0]  sum;
  int checks = 0, failures = 0;

  cim_adder_tree #(.N(N), .W(W)) dut (.in, .sum);

  task automatic check_now();
    int ref_sum = 0;
    for (int i = 0; i < N; i++) ref_sum += int'(in[i]);
    checks++;
    if (int'(sum) != ref_sum) begin
      failures++;
      $display("mismatch: got %0d expected %0d", sum, ref_sum);
    end
  endtask

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < N; i++) in[i] = W'($urandom);
      #1 check_now();
    end
    for (int i = 0; i < N; i++) in[i] = 8'sd127;
    #1 check_now();
    for (int i = 0; i < N; i++) in[i] = -8'sd128;
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
