// tb_htree_node: drives two child packets of random 1024-bit flits into one
// H-tree node. In reduce mode the output packet must be the lane-wise 32-bit sum
// with the children's length; in concatenate mode it must be child a's packet
// followed by child b's, twice as long, with 'last' only on the final flit.
// The receiver applies random back-pressure.
module tb_htree_node;
  import ouro_pkg::*;
  localparam int W = 1024, L = 4;
  logic clk = 0, rst_n = 0;
  node_mode_e mode;
  logic a_valid, a_last, a_ready, b_valid, b_last, b_ready, y_valid, y_last, y_ready;
  logic [W-1:0] a_data, b_data, y_data;
  logic [W-1:0] pa [L], pb [L];
  int checks = 0, failures = 0;

  htree_node #(.W(W), .PSW(32)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // child drivers
  int ia, ib;
  always_comb begin
    a_valid = rst_n && ia < L; a_data = pa[ia % L]; a_last = (ia == L - 1);
    b_valid = rst_n && ib < L; b_data = pb[ib % L]; b_last = (ib == L - 1);
  end
  always_ff @(posedge clk) begin
    if (a_valid && a_ready) ia <= ia + 1;
    if (b_valid && b_ready) ib <= ib + 1;
  end

  task automatic run(input node_mode_e m);
    int n = 0;
    logic [W-1:0] exp_d;
    for (int i = 0; i < L; i++)
      for (int k = 0; k < W / 32; k++) begin
        pa[i][k*32 +: 32] = $urandom; pb[i][k*32 +: 32] = $urandom;
      end
    @(negedge clk); mode = m; ia = 0; ib = 0;
    while (1) begin
      y_ready = 1'($urandom);
      @(posedge clk);
      if (y_valid && y_ready) begin
        if (m == NODE_REDUCE)
          for (int k = 0; k < W / 32; k++) exp_d[k*32 +: 32] = pa[n][k*32 +: 32] + pb[n][k*32 +: 32];
        else exp_d = (n < L) ? pa[n] : pb[n - L];
        chk(y_data == exp_d, $sformatf("mode %0d flit %0d data", m, n));
        chk(y_last == (n == ((m == NODE_REDUCE) ? L : 2 * L) - 1), $sformatf("mode %0d flit %0d last", m, n));
        n++;
        if (y_last) break;
      end
      #1;
    end
    chk(n == ((m == NODE_REDUCE) ? L : 2 * L), "packet length");
  endtask

  initial begin
    ia = L; ib = L; y_ready = 0; mode = NODE_REDUCE;
    repeat (2) @(posedge clk); rst_n = 1;
    run(NODE_REDUCE);
    run(NODE_CONCAT);
    run(NODE_REDUCE);
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
