// tb_xb_array: a reduced crossbar array (4 crossbars of 64 rows x 64 columns,
// 8 banks) configured as one layer split two ways along its input channels and
// two ways along its output channels: crossbars 0 and 2 take activation segment
// 0, crossbars 1 and 3 segment 1; the H-tree reduces (0,1) and (2,3) and
// concatenates the two results at the root. The root packet must equal the
// 128 outputs computed in the testbench, and the compute phase must last
// 8 * 64/8 = 64 cycles (first result flit two cycles later: done, then leaf).
module tb_xb_array;
  import ouro_pkg::*;
  localparam int NX = 4, ROWS = 64, COLS = 64, BANKS = 8, NBLK = 4;
  logic clk = 0, rst_n = 0;
  xb_mode_e xb_mode [NX]; logic [7:0] seg_sel [NX]; logic [NBLK-1:0] blk_mask [NX];
  node_mode_e node_mode [NX];
  logic wr_en; logic [1:0] wr_xb; logic [5:0] wr_row; logic [COLS*8-1:0] wr_data; logic [COLS-1:0] wr_be;
  logic blk_clr, blk_app; logic [1:0] blk_xb; logic [1:0] blk_idx; logic [7:0] blk_slot; logic blk_full;
  logic in_we; logic [7:0] in_seg; logic [0:0] in_addr; logic [255:0] in_data;
  logic start, busy, done, out_valid, out_last, out_ready;
  logic [1023:0] out_data;
  logic signed [7:0] w [NX][ROWS][COLS];
  logic signed [7:0] a [2][ROWS];
  int checks = 0, failures = 0;

  xb_array #(.N_XB(NX), .ROWS(ROWS), .COLS(COLS), .BANKS(BANKS), .NBLK(NBLK), .W(1024)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    int expv [2*COLS];
    int n = 0, t0, tfirst;
    wr_en = 0; wr_xb = 0; wr_row = 0; wr_data = '0; wr_be = '1;
    blk_clr = 0; blk_app = 0; blk_xb = 0; blk_idx = 0;
    in_we = 0; in_seg = 0; in_addr = 0; in_data = '0; start = 0; out_ready = 1;
    for (int x = 0; x < NX; x++) begin
      xb_mode[x] = XB_FFN; seg_sel[x] = 8'(x % 2); blk_mask[x] = '1; node_mode[x] = NODE_REDUCE;
    end
    node_mode[1] = NODE_CONCAT;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int x = 0; x < NX; x++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        wr_en = 1; wr_xb = 2'(x); wr_row = 6'(r);
        for (int c = 0; c < COLS; c++) begin w[x][r][c] = 8'($urandom); wr_data[c*8 +: 8] = w[x][r][c]; end
        @(posedge clk); #1 wr_en = 0;
      end
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < 2; i++) begin
        @(negedge clk); in_we = 1; in_seg = 8'(s); in_addr = 1'(i);
        for (int k = 0; k < 32; k++) begin a[s][i*32+k] = 8'($urandom); in_data[k*8 +: 8] = a[s][i*32+k]; end
        @(posedge clk); #1 in_we = 0;
      end
    for (int c = 0; c < COLS; c++) begin
      expv[c] = 0; expv[COLS + c] = 0;
      for (int r = 0; r < ROWS; r++) begin
        expv[c]        += int'(a[0][r]) * int'(w[0][r][c]) + int'(a[1][r]) * int'(w[1][r][c]);
        expv[COLS + c] += int'(a[0][r]) * int'(w[2][r][c]) + int'(a[1][r]) * int'(w[3][r][c]);
      end
    end
    @(negedge clk); start = 1; t0 = $time;
    @(posedge clk); #1 start = 0;
    tfirst = -1;
    while (1) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        if (tfirst < 0) tfirst = ($time - t0) / 10;
        for (int k = 0; k < 32; k++)
          chk($signed(out_data[k*32 +: 32]) == expv[n*32 + k], $sformatf("flit %0d lane %0d", n, k));
        n++;
        if (out_last) break;
      end
    end
    chk(n == 2 * COLS / 32, $sformatf("flit count %0d", n));
    chk(tfirst == 8 * ROWS / BANKS + 2, $sformatf("first result after %0d cycles", tfirst));
    #1 chk(!busy, "idle after the packet");
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
