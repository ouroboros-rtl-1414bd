// kv_scheduler: inter-sequence scheduling for the KV cache of one pipeline.
// New requests wait in a queue and are scheduled first-come-first-served, so none
// starves. Each scheduled request occupies KV-cache space until it completes.
// When the KV cache reports full, the most recently scheduled request is evicted:
// it leaves the active list, returns to the front of the waiting queue and
// scheduling is suspended until some earlier request completes.
// Interface (one event of each kind per cycle): 'arrive' enqueues req_in at the
// back; 'sched_valid' offers the queue head and is taken when sched_ready;
// 'kv_full' triggers one eviction (evict_valid/evict_id, same cycle);
// 'complete' removes done_id from the active list and lifts the suspension.
// The policy follows the architecture; the queue depths and the single-event
// interface are this design's choices.
module kv_scheduler #(
  parameter int QD = 16,      // waiting queue depth
  parameter int AD = 16,      // active list depth
  parameter int IW = 8        // request id width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          arrive,
  input  logic [IW-1:0] req_in,
  output logic          sched_valid,
  output logic [IW-1:0] sched_id,
  input  logic          sched_ready,
  input  logic          kv_full,
  output logic          evict_valid,
  output logic [IW-1:0] evict_id,
  input  logic          complete,
  input  logic [IW-1:0] done_id,
  output logic          suspended,
  output logic [$clog2(QD+1)-1:0] q_count,
  output logic [$clog2(AD+1)-1:0] a_count
);
  logic [IW-1:0] q [QD];      // q[0] is the head
  logic [IW-1:0] a [AD];      // a[0] oldest ... a[a_count-1] most recent

  logic take;
  always_comb begin
    sched_valid = !suspended && !kv_full && q_count != 0 && a_count != AD[$clog2(AD+1)-1:0];
    sched_id    = q[0];
    take        = sched_valid && sched_ready;
    evict_valid = kv_full && a_count != 0;
    evict_id    = a[a_count - 1'b1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_count   <= '0;
      a_count   <= '0;
      suspended <= 1'b0;
      for (int i = 0; i < QD; i++) q[i] <= '0;
      for (int i = 0; i < AD; i++) a[i] <= '0;
    end else begin
      automatic logic [IW-1:0] nq [QD] = q;
      automatic logic [IW-1:0] na [AD] = a;
      automatic int qc = int'(q_count);
      automatic int ac = int'(a_count);
      // completion: remove from active list and compact
      if (complete) begin
        automatic bit hit = 1'b0;
        for (int i = 0; i < AD; i++) begin
          if (i < ac && na[i] == done_id) hit = 1'b1;
          if (hit && i < AD - 1) na[i] = na[i+1];
        end
        if (hit) ac--;
        suspended <= 1'b0;
      end
      // eviction: most recent active request back to the queue front
      if (evict_valid) begin
        for (int i = QD - 1; i > 0; i--) nq[i] = nq[i-1];
        nq[0] = na[ac-1];
        ac--;
        if (qc < QD) qc++;
        suspended <= 1'b1;
      end else if (take) begin
        na[ac] = nq[0];
        ac++;
        for (int i = 0; i < QD - 1; i++) nq[i] = nq[i+1];
        qc--;
      end
      // arrival at the back
      if (arrive && qc < QD) begin
        nq[qc] = req_in;
        qc++;
      end
      q <= nq;
      a <= na;
      q_count <= qc[$clog2(QD+1)-1:0];
      a_count <= ac[$clog2(AD+1)-1:0];
    end
  end
endmodule
