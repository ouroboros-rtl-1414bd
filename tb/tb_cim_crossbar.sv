// tb_cim_crossbar: full-size crossbar test (1024 rows, 128 int8 columns, 32
// banks). It writes random signed weights, loads random signed activations and
// checks all 128 partial sums against dot products computed in the testbench,
// and checks that one matrix-vector product takes 8 * 1024/32 = 256 cycles.
// It then switches to attention-V mode with two partly filled logical blocks and
// to attention-K mode, where the input and output masks must drop the unused
// rows and columns, and checks a byte-masked write (one K token = one column).
module tb_cim_crossbar;
  import ouro_pkg::*;
  localparam int ROWS = 1024, COLS = 128, BANKS = 32, NBLK = 8;
  logic clk = 0, rst_n = 0;
  logic wr_en; logic [9:0] wr_row; logic [COLS*8-1:0] wr_data; logic [COLS-1:0] wr_be;
  logic in_we; logic [4:0] in_addr; logic [255:0] in_data;
  xb_mode_e mode; logic blk_clr, blk_app; logic [2:0] blk_idx; logic [7:0] blk_slot;
  logic blk_full; logic [NBLK-1:0] blk_mask; logic start, busy, done;
  logic signed [31:0] psum [COLS];
  int checks = 0, failures = 0;

  logic signed [7:0] w [ROWS][COLS];
  logic signed [7:0] a [ROWS];

  cim_crossbar #(.ROWS(ROWS), .COLS(COLS), .BANKS(BANKS), .NBLK(NBLK)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic write_row(input int r, input logic [COLS-1:0] be);
    @(negedge clk);
    wr_en = 1; wr_row = 10'(r); wr_be = be;
    for (int c = 0; c < COLS; c++) wr_data[c*8 +: 8] = w[r][c];
    @(posedge clk); #1 wr_en = 0;
  endtask

  task automatic load_act();
    for (int i = 0; i < ROWS / 32; i++) begin
      @(negedge clk);
      in_we = 1; in_addr = 5'(i);
      for (int k = 0; k < 32; k++) in_data[k*8 +: 8] = a[i*32 + k];
      @(posedge clk); #1 in_we = 0;
    end
  endtask

  task automatic run_and_check(input logic [ROWS-1:0] rv, input logic [COLS-1:0] cv, input string tag);
    int cyc = 0;
    @(negedge clk); start = 1;
    @(posedge clk); #1 start = 0;
    while (!done) begin @(posedge clk); #1 cyc++; end
    chk(cyc == 8 * ROWS / BANKS, $sformatf("%s latency %0d", tag, cyc));
    for (int c = 0; c < COLS; c++) begin
      int s = 0;
      for (int r = 0; r < ROWS; r++) if (rv[r]) s += int'(a[r]) * int'(w[r][c]);
      if (!cv[c]) s = 0;
      chk(psum[c] == s, $sformatf("%s col %0d got %0d exp %0d", tag, c, psum[c], s));
    end
  endtask

  initial begin
    wr_en = 0; wr_row = 0; wr_data = '0; wr_be = '1; in_we = 0; in_addr = 0; in_data = '0;
    mode = XB_FFN; blk_clr = 0; blk_app = 0; blk_idx = 0; blk_mask = '1; start = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) w[r][c] = 8'($urandom);
    for (int r = 0; r < ROWS; r++) a[r] = 8'($urandom);
    for (int r = 0; r < ROWS; r++) write_row(r, '1);
    load_act();
    run_and_check('1, '1, "ffn");
    // extreme values
    for (int r = 0; r < ROWS; r++) a[r] = -8'sd128;
    load_act();
    run_and_check('1, '1, "ffn-min");
    for (int r = 0; r < ROWS; r++) a[r] = 8'($urandom);
    load_act();
    // attention V: block 2 holds 10 tokens, block 5 holds 3
    @(negedge clk); mode = XB_ATTN_V;
    for (int i = 0; i < 10; i++) begin
      @(negedge clk); blk_app = 1; blk_idx = 3'd2;
      #1 chk(blk_slot == 8'(i), "V slot");
      @(posedge clk); #1 blk_app = 0;
    end
    for (int i = 0; i < 3; i++) begin
      @(negedge clk); blk_app = 1; blk_idx = 3'd5;
      @(posedge clk); #1 blk_app = 0;
    end
    blk_mask = 8'b0010_0100;
    begin
      logic [ROWS-1:0] rv = '0;
      for (int r = 256; r < 266; r++) rv[r] = 1'b1;
      for (int r = 640; r < 643; r++) rv[r] = 1'b1;
      run_and_check(rv, '1, "attn-v");
    end
    // attention K: a K token is one column; write column 4 of block 1 only
    @(negedge clk); mode = XB_ATTN_K;
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); blk_app = 1; blk_idx = 3'd1;
      @(posedge clk); #1 blk_app = 0;
    end
    for (int r = 128; r < 256; r++) begin
      logic [COLS-1:0] be = '0;
      be[4] = 1'b1;
      w[r][4] = 8'($urandom);
      write_row(r, be);
    end
    blk_mask = 8'b0000_0010;
    begin
      logic [ROWS-1:0] rv = '0;
      logic [COLS-1:0] cv = '0;
      for (int r = 128; r < 256; r++) rv[r] = 1'b1;
      for (int c = 0; c < 5; c++) cv[c] = 1'b1;
      run_and_check(rv, cv, "attn-k");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
