// tb_xb_ctrl: exercises the crossbar controller at its default size. It appends
// tokens to logical blocks and checks the returned slots and the full flag in K
// and V modes, frees a block, and checks the row-valid and column-valid masks
// latched for FFN, attention-K and attention-V computations against masks
// computed in the testbench from the expected fill counts.
module tb_xb_ctrl;
  import ouro_pkg::*;
  localparam int ROWS = 1024, COLS = 128, NBLK = 8, BR = 128;
  logic clk = 0, rst_n = 0;
  xb_mode_e mode;
  logic clr, app, latch;
  logic [2:0] clr_blk, app_blk;
  logic [7:0] app_slot;
  logic app_full;
  logic [7:0] used [NBLK];
  logic [NBLK-1:0] blk_mask;
  logic [ROWS-1:0] row_valid;
  logic [COLS-1:0] col_valid;
  int checks = 0, failures = 0;
  int fill [NBLK];

  xb_ctrl #(.ROWS(ROWS), .COLS(COLS), .NBLK(NBLK)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic append(input int b);
    @(negedge clk);
    app = 1; app_blk = 3'(b);
    #1 chk(app_slot == 8'(fill[b]), $sformatf("slot blk %0d", b));
    @(posedge clk); #1 app = 0;
    fill[b]++;
  endtask

  task automatic check_masks(input xb_mode_e m, input logic [NBLK-1:0] bm);
    logic [ROWS-1:0] er;
    logic [COLS-1:0] ec;
    int kmax = 0;
    @(negedge clk); mode = m; blk_mask = bm; latch = 1;
    @(posedge clk); #1 latch = 0;
    for (int b = 0; b < NBLK; b++) if (bm[b] && fill[b] > kmax) kmax = fill[b];
    for (int r = 0; r < ROWS; r++)
      er[r] = (m == XB_FFN) ? 1'b1 : (m == XB_ATTN_K) ? bm[r/BR] : (bm[r/BR] && (r % BR) < fill[r/BR]);
    for (int c = 0; c < COLS; c++) ec[c] = (m == XB_ATTN_K) ? (c < kmax) : 1'b1;
    chk(row_valid == er, $sformatf("row mask mode %0d", m));
    chk(col_valid == ec, $sformatf("col mask mode %0d", m));
  endtask

  initial begin
    mode = XB_ATTN_V; clr = 0; app = 0; latch = 0; clr_blk = 0; app_blk = 0; blk_mask = '0;
    for (int b = 0; b < NBLK; b++) fill[b] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // V tokens into blocks 1 and 3
    repeat (5)  append(1);
    repeat (17) append(3);
    check_masks(XB_ATTN_V, 8'b0000_1010);
    check_masks(XB_FFN,    8'b0000_0000);
    // fill block 2 completely in K mode and try one more
    @(negedge clk); mode = XB_ATTN_K;
    for (int i = 0; i < COLS; i++) append(2);
    @(negedge clk); app = 1; app_blk = 3'd2;
    #1 chk(app_full, "block 2 full");
    @(posedge clk); #1 app = 0;
    chk(used[2] == 8'd128, "full block did not grow");
    check_masks(XB_ATTN_K, 8'b0000_0100);
    check_masks(XB_ATTN_K, 8'b0000_1010);
    // free block 3
    @(negedge clk); clr = 1; clr_blk = 3'd3;
    @(posedge clk); #1 clr = 0; fill[3] = 0;
    chk(used[3] == 0, "block 3 freed");
    check_masks(XB_ATTN_V, 8'b0000_1010);
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
