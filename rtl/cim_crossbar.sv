// cim_crossbar: one digital SRAM computing-in-memory crossbar.
// The bitcell array has ROWS wordlines and COLS*8 bitlines, so it holds a
// ROWS x COLS matrix of signed 8-bit weights (weight (r,c) in row r, bits
// 8c..8c+7). It multiplies that matrix by a vector of ROWS signed 8-bit
// activations and returns COLS 32-bit dot products.
// How it computes: the rows form BANKS banks of ROWS/BANKS rows; each cycle one
// row of every bank is read (a 1/32 activation ratio at the default size). An 8:1
// multiplexer picks one bit of each selected row's activation, the bit is ANDed
// with the 8-bit weights, and for every column a BANKS-input adder tree sums the
// products into a 13-bit value that a shift adder accumulates into 32 bits.
// Activations are streamed bit-plane by bit-plane, most-significant first; inside
// a bit-plane the row step runs 0..ROWS/BANKS-1. One matrix-vector product takes
// 8*ROWS/BANKS cycles (256 at the default size).
// The input mask zeroes activations of rows whose row-valid bit is clear and the
// output mask zeroes columns whose column-valid bit is clear; both registers are
// held by the crossbar controller (xb_ctrl), which also keeps the free block table
// for the KV cache. Array size, banking, bit-serial input, adder tree and shift
// adder widths follow the architecture; the bit-plane order, the load and write
// ports and the start/done handshake are this design's choices.
// Interface: weights are written one row at a time with per-weight byte enables
// (a K-cache token is a column: one byte enable over several row writes). The
// activation register is loaded in 256-bit words (32 activations, word i holds
// rows 32i..32i+31). 'start' latches the masks; compute runs for 8*ROWS/BANKS
// cycles; 'done' pulses for one cycle with 'psum' valid and held until the next
// start. Writes are not allowed while busy (6T cells: no concurrent read/write).
module cim_crossbar
  import ouro_pkg::*;
#(
  parameter int ROWS  = 1024,
  parameter int COLS  = 128,
  parameter int BANKS = 32,
  parameter int NBLK  = 8,
  parameter int ABITS = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight / KV write port
  input  logic                        wr_en,
  input  logic [$clog2(ROWS)-1:0]     wr_row,
  input  logic [COLS*8-1:0]           wr_data,
  input  logic [COLS-1:0]             wr_be,
  // activation load port
  input  logic                        in_we,
  input  logic [$clog2(ROWS*ABITS/LINK_W)-1:0] in_addr,
  input  logic [LINK_W-1:0]           in_data,
  // controller (free block table, mode, masks)
  input  xb_mode_e                    mode,
  input  logic                        blk_clr,
  input  logic                        blk_app,
  input  logic [$clog2(NBLK)-1:0]     blk_idx,
  output logic [7:0]                  blk_slot,
  output logic                        blk_full,
  input  logic [NBLK-1:0]             blk_mask,
  // compute
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  output logic signed [31:0]          psum [COLS]
);
  localparam int RPB   = ROWS / BANKS;          // rows per bank
  localparam int STEPS = ABITS * RPB;           // cycles per MVM
  localparam int CW    = $clog2((COLS > ROWS/NBLK ? COLS : ROWS/NBLK) + 1);
  localparam int TW    = 8 + $clog2(BANKS);     // adder tree output width
  localparam int APW   = LINK_W / ABITS;        // activations per load word

  // ---------------- storage ----------------
  logic [COLS*8-1:0]   mem    [ROWS];
  logic [ABITS-1:0]    in_reg [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int c = 0; c < COLS; c++)
        if (wr_be[c]) mem[wr_row][c*8 +: 8] <= wr_data[c*8 +: 8];
    if (in_we)
      for (int i = 0; i < APW; i++)
        in_reg[int'(in_addr)*APW + i] <= in_data[i*ABITS +: ABITS];
  end

  // ---------------- controller ----------------
  logic [ROWS-1:0] row_valid;
  logic [COLS-1:0] col_valid;
  logic [CW-1:0]   used [NBLK];
  logic [CW-1:0]   slot;

  xb_ctrl #(.ROWS(ROWS), .COLS(COLS), .NBLK(NBLK)) u_ctrl (
    .clk, .rst_n, .mode,
    .clr(blk_clr), .clr_blk(blk_idx), .app(blk_app), .app_blk(blk_idx),
    .app_slot(slot), .app_full(blk_full), .used,
    .latch(start && !busy), .blk_mask, .row_valid, .col_valid
  );
  assign blk_slot = 8'(slot);

  // ---------------- sequencer ----------------
  logic [$clog2(STEPS)-1:0] cnt;
  logic [$clog2(ABITS)-1:0] plane;
  logic [$clog2(RPB)-1:0]   rstep;

  always_comb begin
    plane = cnt[$clog2(STEPS)-1 -: $clog2(ABITS)];
    rstep = cnt[$clog2(RPB)-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        cnt  <= '0;
      end else if (busy) begin
        cnt <= cnt + 1'b1;
        if (cnt == $clog2(STEPS)'(STEPS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // ---------------- datapath ----------------
  logic [BANKS-1:0] in_bit;     // masked input bit of the active row of every bank
  always_comb begin
    for (int k = 0; k < BANKS; k++) begin
      automatic int r = k * RPB + int'(rstep);
      in_bit[k] = in_reg[r][ABITS-1-int'(plane)] & row_valid[r];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic signed [7:0]    prod [BANKS];
    logic signed [TW-1:0] tsum, tmask;
    always_comb begin
      for (int k = 0; k < BANKS; k++)
        prod[k] = in_bit[k] ? mem[k * RPB + int'(rstep)][c*8 +: 8] : 8'sd0;
      tmask = col_valid[c] ? tsum : '0;     // output mask
    end
    cim_adder_tree #(.N(BANKS), .W(8)) u_tree (.in(prod), .sum(tsum));
    cim_shift_adder #(.IW(TW), .OW(32)) u_sa (
      .clk, .rst_n, .en(busy),
      .clr(cnt == '0),
      .shift(rstep == '0 && plane != '0),
      .neg(plane == '0),
      .in(tmask), .acc(psum[c])
    );
  end

  // 6T bitcells cannot be written while the array computes
  assert property (@(posedge clk) disable iff (!rst_n) !(busy && wr_en))
    else $error("cim_crossbar: write during computation");
endmodule
