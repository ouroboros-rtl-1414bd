// tb_cim_core: one CIM core at reduced size (2 crossbars of 64 rows x 64 int8
// columns, 8 banks, so one matrix-vector product takes 8 planes x 8 banks = 64
// cycles). Random signed weights are programmed into both crossbars and tokens
// of 4 flits (32 int8 activations each; flits 0-1 feed crossbar 0, 2-3 feed
// crossbar 1) are sent to the core's network port. The output packets are
// compared with a reference model:
//  1. H-tree root in reduce mode, SFU pass, qshift 6: one packet of 2 flits
//     holding sat8((W0^T a0 + W1^T a1) >>> 6).
//  2. Root in concatenate mode: 4 flits, crossbar 0's 64 columns then crossbar 1's.
//  3. Softmax (EXP_ACC + NORM) over the reduced sums, scaled so that a 1.0
//     probability maps to 128; compared with exp()/sum within a tolerance that
//     covers the linear 2^f approximation.
//  4. Two tokens sent back to back: the second arrives while the first is being
//     computed (ping-pong overlap counter) and both results are correct.
// The gap between a token's last input flit and its first output flit is checked
// to be at least the 64-cycle crossbar latency and at most 64 + 40 cycles.
// The network output applies random back-pressure.
module tb_cim_core;
  import ouro_pkg::*;
  localparam int N_XB = 2, ROWS = 64, COLS = 64, BANKS = 8, NBLK = 8;
  localparam int MVM = 8 * ROWS / BANKS;
  logic clk = 0, rst_n = 0;
  logic prog_sel = 0;
  logic [1:0] prog_kind = 0;
  logic [19:0] prog_addr = 0;
  logic [COLS*8-1:0] prog_data = 0;
  logic [COLS-1:0] prog_be = '1;
  logic [7:0] blk_slot;
  logic blk_full;
  flit_t rx_flit, tx_flit;
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready;
  logic [31:0] tok_in, tok_out, overlap_cnt;
  int checks = 0, failures = 0;

  cim_core #(.N_XB(N_XB), .ROWS(ROWS), .COLS(COLS), .BANKS(BANKS), .NBLK(NBLK),
             .IDEP(64), .ODEP(16), .LANES(64), .SFU_BYTES(10240)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  logic signed [7:0] w [N_XB][ROWS][COLS];
  logic signed [7:0] a [N_XB*ROWS];

  // received packets
  logic [LINK_W-1:0] rxq [$];
  int npkt = 0, last_in_t = 0, first_out_t = -1, now = 0;
  bit got_first = 0;
  always @(posedge clk) begin
    now++;
    tx_ready <= 1'($urandom % 4 != 0);
    if (tx_valid && tx_ready) begin
      if (!got_first) begin got_first = 1; first_out_t = now; end
      rxq.push_back(tx_flit.data);
      if (tx_flit.last) npkt++;
    end
  end

  task automatic prog(input logic [1:0] k, input logic [19:0] ad, input logic [COLS*8-1:0] d);
    @(posedge clk);
    prog_sel <= 1; prog_kind <= k; prog_addr <= ad; prog_data <= d;
    @(posedge clk);
    prog_sel <= 0;
  endtask

  task automatic cfg(input logic [7:0] ad, input logic [31:0] d);
    prog(2'd0, 20'(ad), (COLS*8)'(d));
  endtask

  task automatic send_token();
    for (int f = 0; f < 4; f++) begin
      logic [LINK_W-1:0] d;
      for (int i = 0; i < 32; i++) d[i*8 +: 8] = a[f*32 + i];
      rx_flit <= '{dx: 8'd0, dy: 8'd0, last: (f == 3), data: d};
      rx_valid <= 1;
      @(posedge clk);
      while (!rx_ready) @(posedge clk);
    end
    rx_valid <= 0;
    last_in_t = now;
  endtask

  function automatic longint psum(input int x, input int c);
    longint s = 0;
    for (int r = 0; r < ROWS; r++) s += longint'(w[x][r][c]) * longint'(a[x*ROWS + r]);
    return s;
  endfunction

  function automatic int sat8(input longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction

  task automatic rand_act(input int amp);
    for (int i = 0; i < N_XB*ROWS; i++) a[i] = 8'(int'($urandom % (2*amp+1)) - amp);
  endtask

  task automatic wait_pkts(input int n);
    int t = 0;
    while (npkt < n && t < 5000) begin @(posedge clk); t++; end
    chk(npkt >= n, $sformatf("packet %0d not received", n));
  endtask

  task automatic check_latency();
    chk(first_out_t - last_in_t >= MVM && first_out_t - last_in_t <= MVM + 40,
        $sformatf("token latency %0d cycles", first_out_t - last_in_t));
  endtask

  task automatic check_reduce(input int qs);
    chk(rxq.size() >= 2, "reduce packet too short");
    for (int c = 0; c < COLS; c++) begin
      int e, g;
      e = sat8((psum(0, c) + psum(1, c)) >>> qs);
      g = int'($signed(rxq[c / 32][(c % 32)*8 +: 8]));
      chk(g == e, $sformatf("reduce col %0d got %0d exp %0d", c, g, e));
    end
    repeat (2) void'(rxq.pop_front());
  endtask

  int wv;
  initial begin
    for (int x = 0; x < N_XB; x++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin wv = int'($urandom % 255) - 127; w[x][r][c] = 8'(wv); end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int x = 0; x < N_XB; x++)
      for (int r = 0; r < ROWS; r++) begin
        logic [COLS*8-1:0] d;
        for (int c = 0; c < COLS; c++) d[c*8 +: 8] = w[x][r][c];
        prog(2'd1, 20'(x * 1024 + r), d);
      end
    cfg(8'h01, 6);

    // 1. reduce + pass
    rand_act(127);
    send_token();
    wait_pkts(1);
    check_latency();
    chk(rxq.size() == 2, $sformatf("reduce packet has %0d flits", rxq.size()));
    check_reduce(6);

    // 2. concatenate
    cfg(8'h81, 1);
    cfg(8'h01, 10);
    rand_act(127);
    got_first = 0;
    send_token();
    wait_pkts(2);
    check_latency();
    chk(rxq.size() == 4, $sformatf("concat packet has %0d flits", rxq.size()));
    for (int x = 0; x < N_XB; x++)
      for (int c = 0; c < COLS; c++) begin
        int e, g;
        e = sat8(psum(x, c) >>> 10);
        g = int'($signed(rxq[x*2 + c / 32][(c % 32)*8 +: 8]));
        chk(g == e, $sformatf("concat xb %0d col %0d got %0d exp %0d", x, c, g, e));
      end
    repeat (4) void'(rxq.pop_front());

    // 3. softmax over reduced sums (Q16.16 values in about -3..3)
    cfg(8'h81, 0);
    cfg(8'h02, SFU_EXP_ACC);
    cfg(8'h01, 9);
    rand_act(12);
    send_token();
    wait_pkts(3);
    chk(rxq.size() == 2, $sformatf("softmax packet has %0d flits", rxq.size()));
    begin
      real ex [COLS];
      real sum;
      int e, g;
      sum = 0.0;
      for (int c = 0; c < COLS; c++) begin
        ex[c] = $exp(real'(psum(0, c) + psum(1, c)) / 65536.0);
        sum += ex[c];
      end
      for (int c = 0; c < COLS; c++) begin
        e = int'(128.0 * ex[c] / sum);
        g = int'($signed(rxq[c / 32][(c % 32)*8 +: 8]));
        chk(g - e <= 2 + e / 8 && e - g <= 2 + e / 8,
            $sformatf("softmax col %0d got %0d exp %0d", c, g, e));
      end
    end
    repeat (2) void'(rxq.pop_front());

    // 4. back-to-back tokens (ping-pong)
    cfg(8'h02, SFU_PASS);
    cfg(8'h01, 6);
    rand_act(127);
    begin
      logic signed [7:0] a0 [N_XB*ROWS], a1 [N_XB*ROWS];
      a0 = a;
      send_token();
      rand_act(127);
      a1 = a;
      send_token();
      wait_pkts(5);
      a = a0;
      check_reduce(6);
      a = a1;
      check_reduce(6);
    end
    chk(overlap_cnt >= 1, "no token arrived during a computation");
    chk(tok_in == 5 && tok_out == 5, $sformatf("token counters in %0d out %0d", tok_in, tok_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
