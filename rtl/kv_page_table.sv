// kv_page_table: first level of the KV-cache address translation, held by the
// core that keeps the page table for one transformer block. All cores that store
// KV for the block are numbered 0..ring_size-1 and form a ring; coord[i] gives the
// mesh coordinates of ring member i. A new sequence receives nheads consecutive
// ring members, one per attention head, starting where the previous sequence
// stopped; the position wraps to zero past the end of the ring. Because the heads
// of one sequence occupy consecutive members, an entry stores only the starting
// member and the head count: head h of sequence s lives in ring member
// (start+h) mod ring_size. Consecutively scheduled sequences so land on different
// cores, which keeps the KV writes of one token apart from the attention
// computation of another.
// Operations: coordinate table writes, alloc (one cycle), free, and a
// combinational lookup (seq, head) -> core coordinates. The ring policy follows
// the architecture; the compressed entry format and table size are this design's
// choices.
module kv_page_table #(
  parameter int NSEQ = 256,
  parameter int NKV  = 256,
  parameter int HW   = 7,     // head count width
  parameter int CRW  = 8      // coordinate width
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [$clog2(NKV+1)-1:0] ring_size,
  // ring member -> coordinates
  input  logic                    coord_we,
  input  logic [$clog2(NKV)-1:0]  coord_idx,
  input  logic [CRW-1:0]          coord_x,
  input  logic [CRW-1:0]          coord_y,
  // allocation
  input  logic                    alloc,
  input  logic                    free,
  input  logic [$clog2(NSEQ)-1:0] seq,
  input  logic [HW-1:0]           nheads,
  output logic [$clog2(NKV)-1:0]  next_start,
  // lookup
  input  logic [$clog2(NSEQ)-1:0] lk_seq,
  input  logic [HW-1:0]           lk_head,
  output logic                    lk_hit,
  output logic [$clog2(NKV)-1:0]  lk_member,
  output logic [CRW-1:0]          lk_x,
  output logic [CRW-1:0]          lk_y
);
  localparam int RW = $clog2(NKV);

  typedef struct packed {
    logic          valid;
    logic [RW-1:0] start;
    logic [HW-1:0] nheads;
  } pte_t;

  pte_t          pt [NSEQ];
  logic [CRW-1:0] cx [NKV];
  logic [CRW-1:0] cy [NKV];
  logic [RW-1:0]  last;

  function automatic logic [RW-1:0] ring_add(input logic [RW-1:0] a,
                                             input logic [HW-1:0] b,
                                             input logic [$clog2(NKV+1)-1:0] n);
    int s;
    s = int'(a) + int'(b);
    // a < n and b <= n, so at most one wrap is needed
    if (s >= int'(n) && n != 0) s -= int'(n);
    return s[RW-1:0];
  endfunction

  always_comb begin
    next_start = last;
    lk_hit     = pt[lk_seq].valid && (lk_head < pt[lk_seq].nheads);
    lk_member  = ring_add(pt[lk_seq].start, lk_head, ring_size);
    lk_x       = cx[lk_member];
    lk_y       = cy[lk_member];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= '0;
      for (int s = 0; s < NSEQ; s++) pt[s] <= '0;
      for (int i = 0; i < NKV; i++) begin cx[i] <= '0; cy[i] <= '0; end
    end else begin
      if (coord_we) begin
        cx[coord_idx] <= coord_x;
        cy[coord_idx] <= coord_y;
      end
      if (alloc) begin
        pt[seq] <= '{valid: 1'b1, start: last, nheads: nheads};
        last    <= ring_add(last, nheads, ring_size);
      end else if (free) begin
        pt[seq].valid <= 1'b0;
      end
    end
  end
endmodule
