// tb_kv_scheduler: requests 1..6 arrive; the scheduler must hand them out in
// arrival order. When the KV cache reports full, the most recently scheduled
// request must be evicted to the front of the queue and scheduling must stop
// until a request completes; the evicted request must then be the next one
// scheduled.
module tb_kv_scheduler;
  logic clk = 0, rst_n = 0;
  logic arrive; logic [7:0] req_in; logic sched_valid; logic [7:0] sched_id; logic sched_ready;
  logic kv_full, evict_valid; logic [7:0] evict_id; logic complete; logic [7:0] done_id;
  logic suspended; logic [4:0] q_count, a_count;
  int checks = 0, failures = 0;

  kv_scheduler #(.QD(16), .AD(16), .IW(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic take(input int expect_id);
    @(negedge clk); sched_ready = 1;
    #1 chk(sched_valid && int'(sched_id) == expect_id, $sformatf("scheduled %0d expected %0d", sched_id, expect_id));
    @(posedge clk); #1 sched_ready = 0;
  endtask

  initial begin
    arrive = 0; req_in = 0; sched_ready = 0; kv_full = 0; complete = 0; done_id = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 1; i <= 6; i++) begin
      @(negedge clk); arrive = 1; req_in = 8'(i);
      @(posedge clk); #1 arrive = 0;
    end
    take(1); take(2); take(3);
    @(negedge clk); kv_full = 1;
    #1 chk(evict_valid && evict_id == 8'd3, "evict most recent (3)");
    @(posedge clk); #1 kv_full = 0;
    chk(suspended, "suspended after eviction");
    chk(!sched_valid, "no scheduling while suspended");
    chk(a_count == 5'd2 && q_count == 5'd4, "counts after eviction");
    @(negedge clk); complete = 1; done_id = 8'd1;
    @(posedge clk); #1 complete = 0;
    chk(!suspended, "resumed after completion");
    take(3); take(4);
    chk(a_count == 5'd3, "active count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
