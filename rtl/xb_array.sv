// xb_array: the crossbar (XB) array of a CIM core.
// N_XB crossbars share one activation broadcast bus; each crossbar takes the
// activation segment named by its seg_sel (a segment is ROWS activations, loaded
// as ROWS*8/256 words of 256 bits), which is how a layer split along its input
// channels is spread over crossbars. A common 'start' runs all crossbars in
// lock-step. When they finish, every crossbar streams its COLS 32-bit partial
// sums as COLS*32/W flits of W bits into its H-tree leaf, and the H-tree reduces
// or concatenates them on the way to the root according to node_mode.
// Crossbar count, H-tree width and per-crossbar attention/FFN modes follow the
// architecture; the broadcast/segment scheme and the flit order (flit k carries
// columns k*W/32 .. k*W/32+W/32-1) are this design's choices.
// Timing: 'done' pulses when the last root flit has been accepted.
module xb_array
  import ouro_pkg::*;
#(
  parameter int N_XB  = 32,
  parameter int ROWS  = 1024,
  parameter int COLS  = 128,
  parameter int BANKS = 32,
  parameter int NBLK  = 8,
  parameter int W     = 1024,
  parameter int SEGW  = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // configuration from the mapping
  input  xb_mode_e                    xb_mode  [N_XB],
  input  logic [SEGW-1:0]             seg_sel  [N_XB],
  input  logic [NBLK-1:0]             blk_mask [N_XB],
  input  node_mode_e                  node_mode [N_XB],
  // weight / KV write
  input  logic                        wr_en,
  input  logic [$clog2(N_XB)-1:0]     wr_xb,
  input  logic [$clog2(ROWS)-1:0]     wr_row,
  input  logic [COLS*8-1:0]           wr_data,
  input  logic [COLS-1:0]             wr_be,
  // free block table commands for one crossbar
  input  logic                        blk_clr,
  input  logic                        blk_app,
  input  logic [$clog2(N_XB)-1:0]     blk_xb,
  input  logic [$clog2(NBLK)-1:0]     blk_idx,
  output logic [7:0]                  blk_slot,
  output logic                        blk_full,
  // activation broadcast
  input  logic                        in_we,
  input  logic [SEGW-1:0]             in_seg,
  input  logic [$clog2(ROWS*8/LINK_W)-1:0] in_addr,
  input  logic [LINK_W-1:0]           in_data,
  // compute and result stream
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  output logic                        out_valid,
  output logic [W-1:0]                out_data,
  output logic                        out_last,
  input  logic                        out_ready
);
  localparam int LPF = W / 32;            // partial sums per flit
  localparam int NF  = COLS * 32 / W;     // flits per crossbar result
  localparam int FW  = (NF > 1) ? $clog2(NF) : 1;

  logic         lv [N_XB];
  logic [W-1:0] ld [N_XB];
  logic         ll [N_XB];
  logic         lr [N_XB];
  logic         xb_busy [N_XB];
  logic [7:0]   slot [N_XB];
  logic         full [N_XB];
  logic         draining;

  for (genvar x = 0; x < N_XB; x++) begin : g_xb
    logic signed [31:0] psum [COLS];
    logic               xdone;
    logic               pend;
    logic [FW-1:0]      fidx;

    cim_crossbar #(.ROWS(ROWS), .COLS(COLS), .BANKS(BANKS), .NBLK(NBLK)) u_xb (
      .clk, .rst_n,
      .wr_en(wr_en && wr_xb == x), .wr_row, .wr_data, .wr_be,
      .in_we(in_we && in_seg == seg_sel[x]), .in_addr, .in_data,
      .mode(xb_mode[x]),
      .blk_clr(blk_clr && blk_xb == x), .blk_app(blk_app && blk_xb == x),
      .blk_idx, .blk_slot(slot[x]), .blk_full(full[x]), .blk_mask(blk_mask[x]),
      .start, .busy(xb_busy[x]), .done(xdone), .psum
    );

    // leaf serializer
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        pend <= 1'b0;
        fidx <= '0;
      end else if (xdone) begin
        pend <= 1'b1;
        fidx <= '0;
      end else if (pend && lr[x]) begin
        fidx <= fidx + 1'b1;
        if (fidx == FW'(NF - 1)) pend <= 1'b0;
      end
    end

    always_comb begin
      lv[x] = pend;
      ll[x] = (fidx == FW'(NF - 1));
      for (int i = 0; i < LPF; i++)
        ld[x][i*32 +: 32] = psum[int'(fidx)*LPF + i];
    end
  end

  htree_noc #(.NLEAF(N_XB), .W(W), .PSW(32)) u_tree (
    .clk, .rst_n, .node_mode,
    .leaf_valid(lv), .leaf_data(ld), .leaf_last(ll), .leaf_ready(lr),
    .root_valid(out_valid), .root_data(out_data), .root_last(out_last),
    .root_ready(out_ready)
  );

  assign blk_slot = slot[blk_xb];
  assign blk_full = full[blk_xb];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                       draining <= 1'b0;
    else if (start && !busy)                          draining <= 1'b1;
    else if (out_valid && out_ready && out_last)      draining <= 1'b0;
  end

  assign busy = draining || xb_busy[0];
  assign done = out_valid && out_ready && out_last;
endmodule
