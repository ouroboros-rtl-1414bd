// xb_ctrl: crossbar controller with the free block table and the row/column-valid
// registers (third level of the KV-cache address translation).
// In attention mode the 1024-row array is split into NBLK logical blocks of
// BLK_ROWS rows. A K block stores one token per 8-bit weight column (the head
// dimension runs down the rows), a V block stores one token per row (the head
// dimension runs across the columns). The free block table keeps, per logical
// block, the number of tokens already written; 'app' appends one token to a block
// and returns the row/column slot it must be written to, 'clr' frees a block.
// On 'latch' the controller loads the row-valid and column-valid registers for
// the next computation over the blocks in blk_mask:
//   FFN: every row and column valid;
//   K  : all rows of the selected blocks, columns below the largest fill count;
//   V  : the filled rows of the selected blocks, all columns.
// The table of NBLK counters and the two mask registers follow the architecture;
// the command interface and the exact mask rules are this design's choice.
// Timing: table updates and mask loads take effect one clock after the request.
module xb_ctrl
  import ouro_pkg::*;
#(
  parameter int ROWS     = 1024,
  parameter int COLS     = 128,
  parameter int NBLK     = 8,
  parameter int BLK_ROWS = ROWS / NBLK,
  parameter int CW       = $clog2((COLS > BLK_ROWS ? COLS : BLK_ROWS) + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  xb_mode_e                  mode,
  // free block table maintenance
  input  logic                      clr,
  input  logic [$clog2(NBLK)-1:0]   clr_blk,
  input  logic                      app,
  input  logic [$clog2(NBLK)-1:0]   app_blk,
  output logic [CW-1:0]             app_slot,   // slot (column for K, row offset for V) of the new token
  output logic                      app_full,   // block already full: append refused
  output logic [CW-1:0]             used [NBLK],
  // mask registers
  input  logic                      latch,
  input  logic [NBLK-1:0]           blk_mask,
  output logic [ROWS-1:0]           row_valid,
  output logic [COLS-1:0]           col_valid
);
  logic [CW-1:0] cap;
  logic [CW-1:0] kmax;
  logic [ROWS-1:0] row_nxt;
  logic [COLS-1:0] col_nxt;

  always_comb begin
    cap      = (mode == XB_ATTN_K) ? CW'(COLS) : CW'(BLK_ROWS);
    app_slot = used[app_blk];
    app_full = (used[app_blk] >= cap);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NBLK; b++) used[b] <= '0;
    end else begin
      if (app && !app_full) used[app_blk] <= used[app_blk] + 1'b1;
      if (clr)              used[clr_blk] <= '0;
    end
  end

  always_comb begin
    kmax = '0;
    for (int b = 0; b < NBLK; b++)
      if (blk_mask[b] && used[b] > kmax) kmax = used[b];
    for (int r = 0; r < ROWS; r++) begin
      unique case (mode)
        XB_ATTN_K: row_nxt[r] = blk_mask[r / BLK_ROWS];
        XB_ATTN_V: row_nxt[r] = blk_mask[r / BLK_ROWS] &&
                                (CW'(r % BLK_ROWS) < used[r / BLK_ROWS]);
        default:   row_nxt[r] = 1'b1;
      endcase
    end
    for (int c = 0; c < COLS; c++)
      col_nxt[c] = (mode == XB_ATTN_K) ? (CW'(c) < kmax) : 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_valid <= '1;
      col_valid <= '1;
    end else if (latch) begin
      row_valid <= row_nxt;
      col_valid <= col_nxt;
    end
  end
endmodule
