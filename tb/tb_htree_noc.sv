// tb_htree_noc: an 8-leaf H-tree with two configurations from the intra-core
// mapping picture: (1) reductions at the two lower levels and a concatenation
// at the root, (2) concatenations at the leaves' parents and a reduction above.
// Every leaf sends a packet of 2 flits of 32-bit partial sums; the root packet
// is compared with the reduce/concatenate result computed in the testbench.
module tb_htree_noc;
  import ouro_pkg::*;
  localparam int NL = 8, W = 1024, L = 2, LN = W / 32;
  logic clk = 0, rst_n = 0;
  node_mode_e node_mode [NL];
  logic lv [NL], ll [NL], lr [NL];
  logic [W-1:0] ld [NL];
  logic rv, rl, rr;
  logic [W-1:0] rd;
  int idx [NL];
  logic [31:0] ps [NL][L][LN];
  int checks = 0, failures = 0;

  htree_noc #(.NLEAF(NL), .W(W), .PSW(32)) dut (
    .clk, .rst_n, .node_mode, .leaf_valid(lv), .leaf_data(ld), .leaf_last(ll), .leaf_ready(lr),
    .root_valid(rv), .root_data(rd), .root_last(rl), .root_ready(rr));
  always #5 clk = ~clk;

  for (genvar j = 0; j < NL; j++) begin : g_drv
    always_comb begin
      lv[j] = rst_n && idx[j] < L;
      ll[j] = (idx[j] == L - 1);
      for (int k = 0; k < LN; k++) ld[j][k*32 +: 32] = ps[j][idx[j] % L][k];
    end
    always_ff @(posedge clk) if (lv[j] && lr[j]) idx[j] <= idx[j] + 1;
  end

  // reference: packet of heap node n as a list of flits
  function automatic void ref_pkt(input int n, output logic [31:0] q [$]);
    logic [31:0] qa [$], qb [$];
    if (n >= NL) begin
      q = {};
      for (int f = 0; f < L; f++) for (int k = 0; k < LN; k++) q.push_back(ps[n - NL][f][k]);
      return;
    end
    ref_pkt(2 * n, qa);
    ref_pkt(2 * n + 1, qb);
    if (node_mode[n] == NODE_REDUCE) begin
      q = {};
      foreach (qa[i]) q.push_back(qa[i] + qb[i]);
    end else q = {qa, qb};
  endfunction

  task automatic run();
    logic [31:0] q [$];
    int n = 0;
    for (int j = 0; j < NL; j++)
      for (int f = 0; f < L; f++) for (int k = 0; k < LN; k++) ps[j][f][k] = $urandom;
    ref_pkt(1, q);
    @(negedge clk);
    for (int j = 0; j < NL; j++) idx[j] = 0;
    while (1) begin
      rr = 1'($urandom);
      @(posedge clk);
      if (rv && rr) begin
        for (int k = 0; k < LN; k++) chk(rd[k*32 +: 32] == q[n*LN + k], $sformatf("flit %0d lane %0d", n, k));
        n++;
        if (rl) break;
      end
      #1;
    end
    chk(n * LN == q.size(), $sformatf("root packet length %0d", n));
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int j = 0; j < NL; j++) idx[j] = L;
    rr = 0;
    for (int n = 0; n < NL; n++) node_mode[n] = NODE_REDUCE;
    repeat (2) @(posedge clk); rst_n = 1;
    node_mode[1] = NODE_CONCAT;                       // reduce low, concatenate at the root
    run();
    for (int n = 1; n < NL; n++) node_mode[n] = (n >= 4) ? NODE_CONCAT : NODE_REDUCE;
    run();                                            // concatenate low, reduce above
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
