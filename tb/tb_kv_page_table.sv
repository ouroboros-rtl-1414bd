// tb_kv_page_table: a ring of 20 KV cores with arbitrary coordinates. Allocates
// sequences with 8 heads each and checks that every head maps to consecutive
// ring members starting where the previous sequence stopped, that the position
// wraps past the end of the ring, that consecutive sequences start on
// different cores, and that a freed sequence misses.
module tb_kv_page_table;
  localparam int NS = 256, NK = 256;
  logic clk = 0, rst_n = 0;
  logic [8:0] ring_size;
  logic coord_we; logic [7:0] coord_idx, coord_x, coord_y;
  logic alloc, free; logic [7:0] seq; logic [6:0] nheads; logic [7:0] next_start;
  logic [7:0] lk_seq; logic [6:0] lk_head; logic lk_hit; logic [7:0] lk_member, lk_x, lk_y;
  int checks = 0, failures = 0;
  int start_of [NS];

  kv_page_table #(.NSEQ(NS), .NKV(NK)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    int pos = 0;
    coord_we = 0; coord_idx = 0; coord_x = 0; coord_y = 0; alloc = 0; free = 0; seq = 0;
    nheads = 0; lk_seq = 0; lk_head = 0; ring_size = 9'd20;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      @(negedge clk); coord_we = 1; coord_idx = 8'(i); coord_x = 8'(3 * i + 1); coord_y = 8'(100 - i);
      @(posedge clk); #1 coord_we = 0;
    end
    for (int s = 0; s < 6; s++) begin
      @(negedge clk); alloc = 1; seq = 8'(10 + s); nheads = 7'd8;
      #1 chk(int'(next_start) == pos, "ring position");
      @(posedge clk); #1 alloc = 0;
      start_of[10 + s] = pos;
      pos = (pos + 8) % 20;
    end
    for (int s = 0; s < 6; s++)
      for (int h = 0; h < 9; h++) begin
        int m;
        @(negedge clk); lk_seq = 8'(10 + s); lk_head = 7'(h);
        m = (start_of[10 + s] + h) % 20;
        #1;
        chk(lk_hit == (h < 8), "hit");
        if (h < 8) begin
          chk(int'(lk_member) == m, $sformatf("seq %0d head %0d member %0d", 10 + s, h, lk_member));
          chk(int'(lk_x) == 3 * m + 1 && int'(lk_y) == 100 - m, "coordinates");
        end
      end
    for (int s = 1; s < 6; s++) chk(start_of[10 + s] != start_of[9 + s], "consecutive sequences differ");
    @(negedge clk); free = 1; seq = 8'd12;
    @(posedge clk); #1 free = 0;
    @(negedge clk); lk_seq = 8'd12; lk_head = 0;
    #1 chk(!lk_hit, "freed sequence misses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
