// tb_mesh_router: one router at mesh position (2,2). Packets of 1..4 flits are
// injected on all five inputs towards random destinations around it; every flit
// must leave on the dimension-order port (x first, then y; local when the
// destination is (2,2)), packets must not interleave on an output, and nothing
// may be lost. With the east link marked down, a packet to (3,3) must take the
// south port instead, and a packet to (3,2) must still go east (no detour
// exists in its dimension). Outputs apply random back-pressure.
module tb_mesh_router;
  import ouro_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] my_x = 8'd2, my_y = 8'd2;
  logic [4:0] link_down;
  flit_t in_flit [5], out_flit [5];
  logic in_valid [5], in_ready [5], out_valid [5], out_ready [5];
  int checks = 0, failures = 0;

  mesh_router #(.DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic int exp_port(input int dx, input int dy);
    int xd = (dx > 2) ? P_EAST : (dx < 2) ? P_WEST : P_LOCAL;
    int yd = (dy > 2) ? P_SOUTH : (dy < 2) ? P_NORTH : P_LOCAL;
    if (xd != P_LOCAL) return (link_down[xd] && yd != P_LOCAL) ? yd : xd;
    return yd;
  endfunction

  // per-input packet queues: {dx, dy, len, tag}
  int q_dx [5][$], q_dy [5][$], q_len [5][$];
  int sent_flits = 0, recv_flits = 0;
  int cur [5];         // flit index inside the current packet on each input
  int pkt_id [5];
  int owner_in [5];    // output -> input of the packet being received (-1 none)

  // drivers
  always_ff @(posedge clk) begin
    for (int p = 0; p < 5; p++)
      if (in_valid[p] && in_ready[p]) begin
        sent_flits++;
        if (cur[p] == q_len[p][0] - 1) begin
          cur[p] <= 0; pkt_id[p] <= pkt_id[p] + 1;
          void'(q_dx[p].pop_front()); void'(q_dy[p].pop_front()); void'(q_len[p].pop_front());
        end else cur[p] <= cur[p] + 1;
      end
  end
  always_comb
    for (int p = 0; p < 5; p++) begin
      in_valid[p] = rst_n && q_len[p].size() > 0;
      in_flit[p]  = '0;
      if (q_len[p].size() > 0) begin
        in_flit[p].dx   = 8'(q_dx[p][0]);
        in_flit[p].dy   = 8'(q_dy[p][0]);
        in_flit[p].last = (cur[p] == q_len[p][0] - 1);
        in_flit[p].data = {32'(p), 32'(pkt_id[p]), 32'(cur[p]), 160'(q_dx[p][0] * 256 + q_dy[p][0])};
      end
    end

  // monitor
  always @(posedge clk) begin
    for (int o = 0; o < 5; o++) begin
      out_ready[o] <= 1'($urandom);
      if (out_valid[o] && out_ready[o]) begin
        int src;
        src = int'(out_flit[o].data[255:224]);
        recv_flits++;
        chk(exp_port(out_flit[o].dx, out_flit[o].dy) == o,
            $sformatf("flit to (%0d,%0d) left on port %0d", out_flit[o].dx, out_flit[o].dy, o));
        if (owner_in[o] >= 0) chk(owner_in[o] == src, "packets interleaved on an output");
        owner_in[o] = out_flit[o].last ? -1 : src;
      end
    end
  end

  task automatic add_pkt(input int p, input int dx, input int dy, input int len);
    q_dx[p].push_back(dx); q_dy[p].push_back(dy); q_len[p].push_back(len);
  endtask

  initial begin
    link_down = '0;
    for (int p = 0; p < 5; p++) begin cur[p] = 0; pkt_id[p] = 0; owner_in[p] = -1; out_ready[p] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int p = 0; p < 5; p++)
      for (int k = 0; k < 30; k++) add_pkt(p, $urandom % 5, $urandom % 5, 1 + $urandom % 4);
    repeat (1500) @(posedge clk);
    chk(recv_flits == sent_flits && sent_flits > 0, $sformatf("sent %0d received %0d", sent_flits, recv_flits));
    // faulty east link
    link_down = 5'b00100;
    add_pkt(P_LOCAL, 3, 3, 2);
    add_pkt(P_WEST, 3, 2, 1);
    repeat (100) @(posedge clk);
    chk(recv_flits == sent_flits, "detour traffic delivered");
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
