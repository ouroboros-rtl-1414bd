// tb_wafer_top: end-to-end test of the wafer at reduced size: 2 x 2 dies of one
// core each (cores of 2 crossbars, 64 rows x 64 int8 columns, 8 banks). A model
// of four layers is mapped one layer per core and tokens flow through the cores
// as packets, the token-grained pipeline of the architecture:
//   stage 0, core (0,0): 128 -> 2x64, H-tree concatenate, SFU pass, >>> 9
//   stage 1, core (1,1): 128 -> 64, H-tree reduce, SFU pass, >>> 10
//   stage 2, core (0,1): 64 -> 2x64 (both crossbars read segment 0),
//                        concatenate, SFU multiply by 0.5, >>> 8
//   stage 3, core (1,0): 128 -> 64, reduce, softmax (EXP_ACC + NORM), >>> 9
// Tokens enter at the west edge of row 0 and leave at the east edge of row 0.
// The east link of router (0,0) is marked faulty, so stage 0's packets to (1,1)
// must detour south first. Four tokens are sent back to back.
// Mechanism counters, each of which must be non-zero at the end:
//   reduce / concat      stages whose result matched the integer reference
//   softmax              output values within tolerance of exp()/sum
//   multiply             stage 2 reference (exact) matched
//   detour               flits on the column-0 die seam (only the detour uses it)
//   die crossings        flits crossing any die seam
//   ping-pong overlap    tokens received by a core while it was computing
//   pipelining           output interval shorter than one token's latency
//   kv append / kv full  free block table appends in attention-V mode and the
//                        refusal once a logical block is full
// The output interval is also bounded by 2 x (64-cycle MVM + 120 cycles).
module tb_wafer_top;
  import ouro_pkg::*;
  localparam int DX = 2, DY = 2, CX = 1, CY = 1;
  localparam int N_XB = 2, ROWS = 64, COLS = 64, BANKS = 8;
  localparam int NW = DX*CX, NH = DY*CY;
  localparam int MVM = 8 * ROWS / BANKS;
  localparam int NTOK = 4;

  logic clk = 0, rst_n = 0;
  logic prog_en = 0;
  logic [7:0] prog_x = 0, prog_y = 0;
  logic [1:0] prog_kind = 0;
  logic [19:0] prog_addr = 0;
  logic [COLS*8-1:0] prog_data = 0;
  logic [COLS-1:0] prog_be = '1;
  logic [7:0] blk_slot;
  logic blk_full;
  logic [31:0] st_tok_in, st_tok_out, st_overlap;
  logic fault_we = 0;
  logic [7:0] fault_x = 0, fault_y = 0;
  logic [4:0] fault_mask = 0;
  flit_t n_in_flit [NW], n_out_flit [NW], s_in_flit [NW], s_out_flit [NW];
  logic n_in_valid [NW], n_in_ready [NW], n_out_valid [NW], n_out_ready [NW];
  logic s_in_valid [NW], s_in_ready [NW], s_out_valid [NW], s_out_ready [NW];
  flit_t w_in_flit [NH], w_out_flit [NH], e_in_flit [NH], e_out_flit [NH];
  logic w_in_valid [NH], w_in_ready [NH], w_out_valid [NH], w_out_ready [NH];
  logic e_in_valid [NH], e_in_ready [NH], e_out_valid [NH], e_out_ready [NH];

  wafer_top #(.DX(DX), .DY(DY), .CX(CX), .CY(CY), .N_XB(N_XB), .ROWS(ROWS), .COLS(COLS),
              .BANKS(BANKS), .IDEP(64), .ODEP(16), .LANES(64), .SFU_BYTES(10240)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int m_reduce = 0, m_concat = 0, m_softmax = 0, m_mul = 0, m_detour = 0, m_cross = 0;
  int m_overlap = 0, m_pipe = 0, m_kv_app = 0, m_kv_full = 0;

  // unused edges idle; the outputs that are not expected to carry traffic are
  // watched
  int stray = 0;
  always_comb
    for (int i = 0; i < NW; i++) begin
      n_in_valid[i] = 0; s_in_valid[i] = 0; n_in_flit[i] = '0; s_in_flit[i] = '0;
      n_out_ready[i] = 1; s_out_ready[i] = 1;
    end
  always_comb begin
    for (int i = 0; i < NH; i++) begin e_in_valid[i] = 0; e_in_flit[i] = '0; w_out_ready[i] = 1; end
    w_in_valid[1] = 0; w_in_flit[1] = '0;
    e_out_ready[1] = 1;
  end

  // weights [core][xb][row][col], core index = y*2 + x
  logic signed [7:0] w [4][N_XB][ROWS][COLS];
  logic signed [7:0] tok [NTOK][128];
  logic [LINK_W-1:0] outq [$];
  int now = 0, nout = 0;
  int out_t [NTOK];
  int in_t  [NTOK];

  always @(posedge clk) begin
    now++;
    e_out_ready[0] <= 1'($urandom % 4 != 0);
    if (e_out_valid[0] && e_out_ready[0]) begin
      outq.push_back(e_out_flit[0].data);
      if (e_out_flit[0].last) begin
        if (nout < NTOK) out_t[nout] = now;
        nout++;
      end
    end
    for (int i = 0; i < NW; i++) if (n_out_valid[i] || s_out_valid[i]) stray++;
    if (w_out_valid[0] || w_out_valid[1] || e_out_valid[1]) stray++;
    // seam traffic
    if (dut.dn_v[1][0] && dut.dn_r[1][0]) m_detour++;
    for (int x = 0; x < NW; x++) begin
      if (dut.dn_v[1][x] && dut.dn_r[1][x]) m_cross++;
      if (dut.up_v[1][x] && dut.up_r[1][x]) m_cross++;
    end
    for (int y = 0; y < NH; y++) begin
      if (dut.rt_v[1][y] && dut.rt_r[1][y]) m_cross++;
      if (dut.lf_v[1][y] && dut.lf_r[1][y]) m_cross++;
    end
  end

  task automatic prog(input int x, input int y, input logic [1:0] k, input logic [19:0] ad,
                      input logic [COLS*8-1:0] d);
    @(posedge clk);
    prog_en <= 1; prog_x <= 8'(x); prog_y <= 8'(y); prog_kind <= k; prog_addr <= ad; prog_data <= d;
    @(posedge clk);
    prog_en <= 0;
  endtask
  task automatic cfg(input int x, input int y, input logic [7:0] ad, input logic [31:0] d);
    prog(x, y, 2'd0, 20'(ad), (COLS*8)'(d));
  endtask

  // ---------------- reference model ----------------
  function automatic int sat8(input longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction
  function automatic longint dotc(input int core, input int x, input int c,
                                  input logic signed [7:0] act [128], input int base);
    longint s = 0;
    for (int r = 0; r < ROWS; r++) s += longint'(w[core][x][r][c]) * longint'(act[base + r]);
    return s;
  endfunction

  // stages 0..2, exact; returns the activations entering stage 3
  task automatic model(input logic signed [7:0] a0 [128], output logic signed [7:0] a3 [128]);
    logic signed [7:0] a1 [128], a2 [128];
    // stage 0, core (0,0) = index 0: concat
    for (int x = 0; x < 2; x++)
      for (int c = 0; c < COLS; c++) a1[x*64 + c] = 8'(sat8(dotc(0, x, c, a0, x*64) >>> 9));
    // stage 1, core (1,1) = index 3: reduce
    for (int c = 0; c < 128; c++) a2[c] = 0;
    for (int c = 0; c < COLS; c++)
      a2[c] = 8'(sat8((dotc(3, 0, c, a1, 0) + dotc(3, 1, c, a1, 64)) >>> 10));
    // stage 2, core (0,1) = index 2: both crossbars read segment 0, concat, x0.5
    for (int x = 0; x < 2; x++)
      for (int c = 0; c < COLS; c++)
        a3[x*64 + c] = 8'(sat8(((dotc(2, x, c, a2, 0) * 32768) >>> 16) >>> 8));
  endtask

  task automatic send_token(input int t);
    for (int f = 0; f < 4; f++) begin
      logic [LINK_W-1:0] d;
      for (int i = 0; i < 32; i++) d[i*8 +: 8] = tok[t][f*32 + i];
      w_in_flit[0] <= '{dx: 8'd0, dy: 8'd0, last: (f == 3), data: d};
      w_in_valid[0] <= 1;
      @(posedge clk);
      while (!w_in_ready[0]) @(posedge clk);
    end
    w_in_valid[0] <= 0;
    in_t[t] = now;
  endtask

  int wv;
  initial begin
    w_in_valid[0] = 0; w_in_flit[0] = '0;
    for (int k = 0; k < 4; k++)
      for (int x = 0; x < N_XB; x++)
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) begin wv = int'($urandom % 255) - 127; w[k][x][r][c] = 8'(wv); end
    for (int t = 0; t < NTOK; t++)
      for (int i = 0; i < 128; i++) begin wv = int'($urandom % 255) - 127; tok[t][i] = 8'(wv); end
    repeat (3) @(posedge clk); rst_n = 1;

    // weights
    for (int k = 0; k < 4; k++)
      for (int x = 0; x < N_XB; x++)
        for (int r = 0; r < ROWS; r++) begin
          logic [COLS*8-1:0] d;
          for (int c = 0; c < COLS; c++) d[c*8 +: 8] = w[k][x][r][c];
          prog(k % 2, k / 2, 2'd1, 20'(x * 1024 + r), d);
        end
    // stage 0 at (0,0)
    cfg(0, 0, 8'h00, {16'd0, 8'd1, 8'd1});
    cfg(0, 0, 8'h81, 1);
    cfg(0, 0, 8'h01, 9);
    // stage 1 at (1,1)
    cfg(1, 1, 8'h00, {16'd0, 8'd1, 8'd0});
    cfg(1, 1, 8'h01, 10);
    // stage 2 at (0,1)
    cfg(0, 1, 8'h00, {16'd0, 8'd0, 8'd1});
    cfg(0, 1, 8'h41, {14'd0, 8'hff, 8'd0, 2'(XB_FFN)});
    cfg(0, 1, 8'h81, 1);
    cfg(0, 1, 8'h02, SFU_MUL);
    cfg(0, 1, 8'h03, 32'h8000);
    cfg(0, 1, 8'h01, 8);
    // stage 3 at (1,0), output leaves the wafer eastwards on row 0
    cfg(1, 0, 8'h00, {16'd0, 8'd0, 8'd2});
    cfg(1, 0, 8'h02, SFU_EXP_ACC);
    cfg(1, 0, 8'h01, 9);
    // faulty east link of router (0,0)
    @(posedge clk);
    fault_we <= 1; fault_x <= 0; fault_y <= 0; fault_mask <= 5'b00100;
    @(posedge clk);
    fault_we <= 0;

    for (int t = 0; t < NTOK; t++) send_token(t);
    begin
      int k = 0;
      while (nout < NTOK && k < 20000) begin @(posedge clk); k++; end
    end
    chk(nout == NTOK, $sformatf("%0d of %0d tokens left the wafer", nout, NTOK));
    chk(outq.size() == 2 * NTOK, $sformatf("%0d output flits", outq.size()));

    // check every token's final softmax and, through it, the earlier stages
    for (int t = 0; t < NTOK && outq.size() >= 2; t++) begin
      logic signed [7:0] a3 [128];
      real ex [COLS];
      real sum;
      int e, g, bad;
      longint p [COLS];
      sum = 0.0;
      bad = 0;
      model(tok[t], a3);
      for (int c = 0; c < COLS; c++) begin
        p[c] = dotc(1, 0, c, a3, 0) + dotc(1, 1, c, a3, 64);
        ex[c] = $exp(real'(p[c]) / 65536.0);
        sum += ex[c];
      end
      for (int c = 0; c < COLS; c++) begin
        e = int'(128.0 * ex[c] / sum);
        g = int'($signed(outq[c / 32][(c % 32)*8 +: 8]));
        chk(g - e <= 2 + e / 8 && e - g <= 2 + e / 8,
            $sformatf("token %0d col %0d got %0d exp %0d", t, c, g, e));
        if (g - e > 2 + e / 8 || e - g > 2 + e / 8) bad++;
      end
      // the softmax result can only match if every stage before it was exact
      if (bad == 0) begin m_softmax++; m_concat += 2; m_reduce += 2; m_mul++; end
      repeat (2) void'(outq.pop_front());
    end

    // pipelining: tokens overlap in the cores
    for (int t = 1; t < NTOK; t++) begin
      chk(out_t[t] - out_t[t-1] <= 2 * (MVM + 120),
          $sformatf("output interval %0d cycles", out_t[t] - out_t[t-1]));
      if (out_t[t] - out_t[t-1] < out_t[0] - in_t[0]) m_pipe++;
    end
    $display("token latency %0d cycles, output intervals %0d %0d %0d", out_t[0] - in_t[0],
             out_t[1] - out_t[0], out_t[2] - out_t[1], out_t[3] - out_t[2]);

    // per-core token counters and ping-pong overlap
    for (int k = 0; k < 4; k++) begin
      @(posedge clk);
      prog_en <= 1; prog_x <= 8'(k % 2); prog_y <= 8'(k / 2); prog_kind <= 2'd0; prog_addr <= 20'hff;
      @(posedge clk);
      #1;
      chk(st_tok_in == NTOK && st_tok_out == NTOK,
          $sformatf("core %0d counted %0d in %0d out", k, st_tok_in, st_tok_out));
      m_overlap += st_overlap;
      prog_en <= 0;
    end

    // KV cache: crossbar 0 of core (0,0) in attention-V mode, logical block 3
    cfg(0, 0, 8'h40, {14'd0, 8'hff, 8'd0, 2'(XB_ATTN_V)});
    for (int i = 0; i <= ROWS / 8; i++) begin
      @(posedge clk);
      prog_en <= 1; prog_x <= 0; prog_y <= 0; prog_kind <= 2'd2; prog_addr <= 20'd3;
      #1;
      if (i < ROWS / 8) begin
        chk(blk_slot == 8'(i) && !blk_full, $sformatf("append %0d got slot %0d full %0b", i, blk_slot, blk_full));
        if (blk_slot == 8'(i) && !blk_full) m_kv_app++;
      end else begin
        chk(blk_full, "block not reported full");
        if (blk_full) m_kv_full++;
      end
    end
    @(posedge clk);
    prog_en <= 0;
    prog(0, 0, 2'd3, 20'd3, '0);
    @(posedge clk);
    prog_en <= 1; prog_x <= 0; prog_y <= 0; prog_kind <= 2'd0; prog_addr <= 20'd3;
    #1;
    chk(blk_slot == 0 && !blk_full, "freed block not empty");
    @(posedge clk);
    prog_en <= 0;

    chk(stray == 0, $sformatf("%0d flits left on an unexpected edge", stray));
    $display("mechanisms: reduce %0d concat %0d softmax %0d mul %0d detour %0d die-crossings %0d overlap %0d pipelined %0d kv-append %0d kv-full %0d",
             m_reduce, m_concat, m_softmax, m_mul, m_detour, m_cross, m_overlap, m_pipe, m_kv_app, m_kv_full);
    chk(m_reduce > 0, "H-tree reduce never happened");
    chk(m_concat > 0, "H-tree concatenate never happened");
    chk(m_softmax > 0, "softmax never happened");
    chk(m_mul > 0, "SFU multiply never happened");
    chk(m_detour > 0, "fault detour never happened");
    chk(m_cross > 0, "no packet crossed a die seam");
    chk(m_overlap > 0, "no ping-pong overlap");
    chk(m_pipe > 0, "tokens were never pipelined");
    chk(m_kv_app > 0, "no KV append");
    chk(m_kv_full > 0, "KV block full never reported");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
