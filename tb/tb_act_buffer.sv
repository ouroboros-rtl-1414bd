// tb_act_buffer: writes random 256-bit words to every address of a 2048-word
// buffer (one 64 KB input-buffer half), reads them back in random order while
// writing other addresses, and checks the one-cycle read latency.
module tb_act_buffer;
  localparam int D = 2048, W = 256;
  logic clk = 0;
  logic we, re;
  logic [10:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  act_buffer #(.DEPTH(D), .W(W)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [W-1:0] rnd();
    for (int k = 0; k < W / 32; k++) rnd[k*32 +: 32] = $urandom;
  endfunction

  initial begin
    logic [10:0] ra;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 11'(a); wdata = rnd(); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      ra = 11'($urandom); re = 1; raddr = ra;
      we = 1; waddr = ra + 11'd7; wdata = rnd();
      @(posedge clk); #1;
      model[waddr] = wdata;
      re = 0; we = 0;
      checks++;
      if (rdata !== model[ra] && ra != waddr) begin
        failures++;
        if (failures < 5) $display("FAIL addr %0d", ra);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
