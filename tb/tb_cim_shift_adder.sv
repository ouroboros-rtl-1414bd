// tb_cim_shift_adder: applies random sequences of clear / shift / negate steps
// with random 13-bit inputs and compares the 32-bit accumulator with a
// reference accumulator kept in the testbench. It also runs one complete
// bit-serial product: an 8-bit signed activation streamed MSB first against a
// constant tree value must give activation * value.
module tb_cim_shift_adder;
  logic clk = 0, rst_n = 0;
  logic en, clr, shift, neg;
  logic signed [12:0] in;
  logic signed [31:0] acc;
  int checks = 0, failures = 0;
  longint model;

  cim_shift_adder #(.IW(13), .OW(32)) dut (.clk, .rst_n, .en, .clr, .shift, .neg, .in, .acc);
  always #5 clk = ~clk;

  initial begin
    en = 0; clr = 0; shift = 0; neg = 0; in = '0; model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      en = 1'($urandom); clr = ($urandom % 8) == 0; shift = 1'($urandom);
      neg = 1'($urandom); in = 13'($urandom);
      @(posedge clk);
      if (en) begin
        longint b;
        b = clr ? 0 : (shift ? model * 2 : model);
        model = neg ? b - longint'(in) : b + longint'(in);
        model = longint'(int'(model));   // 32-bit wrap
      end
      #1;
      checks++;
      if (longint'(acc) != model) begin
        failures++;
        $display("mismatch at %0d: got %0d expected %0d", t, acc, model);
      end
    end
    // full bit-serial multiply
    for (int t = 0; t < 20; t++) begin
      logic signed [7:0] a;
      logic signed [12:0] v;
      a = 8'($urandom);
      v = 13'($urandom);
      for (int b = 7; b >= 0; b--) begin
        @(negedge clk);
        en = 1; clr = (b == 7); shift = (b != 7); neg = (b == 7);
        in = a[b] ? v : 13'sd0;
      end
      @(negedge clk); en = 0;
      checks++;
      if (int'(acc) != int'(a) * int'(v)) begin
        failures++;
        $display("product mismatch: %0d * %0d got %0d", a, v, acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
