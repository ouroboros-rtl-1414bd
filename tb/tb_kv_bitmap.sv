// tb_kv_bitmap: full-size 256 x 256 bitmap (32 crossbars of 8 logical blocks).
// Allocates V blocks for a sequence with a preferred crossbar (they must come
// from that crossbar while it has free blocks, then from elsewhere), K blocks
// (they must avoid the preferred crossbar), checks the ownership row, the free
// count and the threshold 'full' flag, frees a sequence and checks its blocks
// return. A testbench model of the ownership table is kept alongside.
module tb_kv_bitmap;
  localparam int NS = 256, NB = 256, BPX = 8;
  logic clk = 0, rst_n = 0;
  logic [7:0] seq; logic alloc, is_k, free; logic [4:0] pref_xb;
  logic alloc_ok; logic [7:0] alloc_blk; logic [NB-1:0] seq_blocks;
  logic [8:0] threshold, free_cnt; logic full;
  int owner [NB];
  int checks = 0, failures = 0;

  kv_bitmap #(.NSEQ(NS), .NBLK(NB), .BPX(BPX)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic do_alloc(input int s, input bit k, input int px, output int b);
    @(negedge clk); seq = 8'(s); is_k = k; pref_xb = 5'(px); alloc = 1;
    #1 b = int'(alloc_blk);
    chk(alloc_ok, "alloc ok");
    chk(owner[b] < 0, $sformatf("block %0d was free", b));
    @(posedge clk); #1 alloc = 0;
    owner[b] = s;
  endtask

  initial begin
    int b, nfree;
    logic [NB-1:0] row;
    seq = 0; alloc = 0; is_k = 0; free = 0; pref_xb = 0; threshold = 9'd20;
    for (int i = 0; i < NB; i++) owner[i] = -1;
    repeat (2) @(posedge clk); rst_n = 1;
    // V blocks for sequence 3 preferring crossbar 5: first 8 inside crossbar 5
    for (int i = 0; i < 10; i++) begin
      do_alloc(3, 0, 5, b);
      if (i < 8) chk(b / BPX == 5, $sformatf("V block %0d in crossbar 5", b));
      else       chk(b / BPX != 5, "V overflow leaves crossbar 5");
    end
    // K blocks for sequence 7 preferring crossbar 0: must avoid crossbar 0
    for (int i = 0; i < 12; i++) begin
      do_alloc(7, 1, 0, b);
      chk(b / BPX != 0, $sformatf("K block %0d avoids crossbar 0", b));
    end
    @(negedge clk); seq = 8'd3;
    #1 begin
      row = '0;
      for (int i = 0; i < NB; i++) row[i] = (owner[i] == 3);
      chk(seq_blocks == row, "ownership row of sequence 3");
    end
    // fill until the threshold trips
    for (int i = 0; i < 220; i++) do_alloc(9, 0, 31, b);
    nfree = 0;
    for (int i = 0; i < NB; i++) if (owner[i] < 0) nfree++;
    #1 chk(int'(free_cnt) == nfree, "free count");
    chk(full == (nfree < 20), "threshold flag");
    chk(full, "cache marked full below threshold");
    // free sequence 9
    @(negedge clk); seq = 8'd9; free = 1;
    @(posedge clk); #1 free = 0;
    for (int i = 0; i < NB; i++) if (owner[i] == 9) owner[i] = -1;
    nfree = 0;
    for (int i = 0; i < NB; i++) if (owner[i] < 0) nfree++;
    chk(int'(free_cnt) == nfree, "free count after free");
    chk(!full, "not full after free");
    @(negedge clk); seq = 8'd9;
    #1 chk(seq_blocks == '0, "sequence 9 owns nothing");
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
