// kv_bitmap: second level of the KV-cache address translation, kept in the
// controller of a KV core. Bit (m,n) of an NSEQ x NBLK bitmap is 1 when sequence m
// owns logical block n of this core (block n = crossbar n/BPX, block n%BPX inside
// it). Operations, one per cycle:
//   alloc: give sequence 'seq' one free block. For a V block the search starts in
//          crossbar pref_xb (V grows along the input channels, so blocks in one
//          crossbar accumulate in a single pass); for a K block it starts in the
//          other crossbars (K grows along the output channels). If the preferred
//          set has no free block, any free block is taken. alloc_ok/alloc_blk
//          report the result combinationally, the bitmap updates at the edge.
//   free : release every block of 'seq'.
// query: seq_blocks is the bitmap row of 'seq'. free_cnt counts free blocks;
// 'full' is raised when free_cnt drops below 'threshold', which reserves room for
// KV growth during decoding. Bitmap size, per-sequence ownership, the K/V search
// preference and the threshold rule follow the architecture; the lowest-index
// search order is this design's choice.
module kv_bitmap #(
  parameter int NSEQ = 256,
  parameter int NBLK = 256,
  parameter int BPX  = 8            // logical blocks per crossbar
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [$clog2(NSEQ)-1:0]    seq,
  input  logic                       alloc,
  input  logic                       is_k,
  input  logic [$clog2(NBLK/BPX)-1:0] pref_xb,
  output logic                       alloc_ok,
  output logic [$clog2(NBLK)-1:0]    alloc_blk,
  input  logic                       free,
  output logic [NBLK-1:0]            seq_blocks,
  input  logic [$clog2(NBLK+1)-1:0]  threshold,
  output logic [$clog2(NBLK+1)-1:0]  free_cnt,
  output logic                       full
);
  logic [NBLK-1:0] bmap [NSEQ];
  logic [NBLK-1:0] occ;              // OR of all rows: block owned by someone
  logic [NBLK-1:0] pref;
  logic            found_p, found_a;
  logic [$clog2(NBLK)-1:0] blk_p, blk_a;

  always_comb begin
    for (int n = 0; n < NBLK; n++) begin
      automatic logic in_x = (n / BPX) == int'(pref_xb);
      pref[n] = is_k ? !in_x : in_x;
    end
    found_p = 1'b0; blk_p = '0;
    found_a = 1'b0; blk_a = '0;
    for (int n = NBLK - 1; n >= 0; n--) begin
      if (!occ[n] && pref[n]) begin found_p = 1'b1; blk_p = n[$clog2(NBLK)-1:0]; end
      if (!occ[n])            begin found_a = 1'b1; blk_a = n[$clog2(NBLK)-1:0]; end
    end
    alloc_ok  = found_a;
    alloc_blk = found_p ? blk_p : blk_a;
    seq_blocks = bmap[seq];
    free_cnt = '0;
    for (int n = 0; n < NBLK; n++) free_cnt += {{($clog2(NBLK+1)-1){1'b0}}, !occ[n]};
    full = free_cnt < threshold;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < NSEQ; m++) bmap[m] <= '0;
      occ <= '0;
    end else if (free) begin
      occ       <= occ & ~bmap[seq];
      bmap[seq] <= '0;
    end else if (alloc && alloc_ok) begin
      bmap[seq][alloc_blk] <= 1'b1;
      occ[alloc_blk]       <= 1'b1;
    end
  end
endmodule
