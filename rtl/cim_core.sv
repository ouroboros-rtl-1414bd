// cim_core: one SRAM computing-in-memory core, the tile repeated over the wafer.
// It contains a 128 KB ping-pong input buffer (two 64 KB halves), a crossbar
// array of N_XB 1024x1024-bit crossbars joined by a 1024-bit H-tree, a 64-lane
// special function unit and a 32 KB output buffer (two 16 KB even/odd halves),
// all sequenced by the control unit (core_ctrl). A token (one activation vector)
// arrives as a packet of 256-bit flits from the local router port, is multiplied
// by the weights held in the crossbars, passed through the SFU, requantised to
// int8 and sent as a packet to the next pipeline stage.
// Programming port: prog_sel selects this core; prog_kind 0 writes a control
// register (core_ctrl map, address prog_addr[7:0], data prog_data[31:0]),
// 1 writes one crossbar row (crossbar prog_addr[19:10], row prog_addr[9:0],
// data prog_data, byte enables prog_be), 2 appends a token slot to logical block
// prog_addr[2:0] of crossbar prog_addr[19:10]'s free block table, 3 frees that
// block. Loading weights over a side bus instead of the network is this design's
// choice; the component sizes follow the architecture.
module cim_core
  import ouro_pkg::*;
#(
  parameter int N_XB  = 32,
  parameter int ROWS  = 1024,
  parameter int COLS  = 128,
  parameter int BANKS = 32,
  parameter int NBLK  = 8,
  parameter int IDEP  = 2048,
  parameter int ODEP  = 512,
  parameter int LANES = 64,
  parameter int SFU_BYTES = 10240
) (
  input  logic               clk,
  input  logic               rst_n,
  // programming
  input  logic               prog_sel,
  input  logic [1:0]         prog_kind,
  input  logic [19:0]        prog_addr,
  input  logic [COLS*8-1:0]  prog_data,
  input  logic [COLS-1:0]    prog_be,
  output logic [7:0]         blk_slot,
  output logic               blk_full,
  // network (local router port)
  input  flit_t              rx_flit,
  input  logic               rx_valid,
  output logic               rx_ready,
  output flit_t              tx_flit,
  output logic               tx_valid,
  input  logic               tx_ready,
  // status
  output logic [31:0]        tok_in,
  output logic [31:0]        tok_out,
  output logic [31:0]        overlap_cnt
);
  localparam int SEGW = 8;
  localparam int IAW  = $clog2(IDEP);
  localparam int OAW  = $clog2(ODEP);

  xb_mode_e          xb_mode  [N_XB];
  logic [SEGW-1:0]   seg_sel  [N_XB];
  logic [NBLK-1:0]   blk_mask [N_XB];
  node_mode_e        node_mode [N_XB];

  logic              ib_we [2];
  logic [IAW-1:0]    ib_waddr, ib_raddr;
  logic [LINK_W-1:0] ib_wdata;
  logic              ib_re [2];
  logic [LINK_W-1:0] ib_rdata [2];
  logic              ob_we, ob_re;
  logic [OAW-1:0]    ob_waddr, ob_raddr;
  logic [LINK_W-1:0] ob_wdata [2];
  logic [LINK_W-1:0] ob_rdata [2];

  logic              xa_in_we, xa_start, xa_busy, xa_done;
  logic [SEGW-1:0]   xa_in_seg;
  logic [$clog2(ROWS*8/LINK_W)-1:0] xa_in_addr;
  logic [LINK_W-1:0] xa_in_data;
  logic              xa_out_valid, xa_out_last, xa_out_ready;
  logic [1023:0]     xa_out_data;

  logic               sf_cmd_valid, sf_cmd_ready, sf_acc_clr;
  sfu_op_e            sf_cmd_op;
  logic signed [31:0] sf_cmd_scalar;
  logic               sf_in_valid, sf_in_last, sf_in_ready;
  logic signed [31:0] sf_in_data  [LANES];
  logic               sf_out_valid, sf_out_last, sf_out_ready, sf_done;
  logic signed [31:0] sf_out_data [LANES];
  logic signed [47:0] sf_acc;
  logic signed [31:0] sf_scalar_out;

  core_ctrl #(.N_XB(N_XB), .ROWS(ROWS), .NBLK(NBLK), .IDEP(IDEP), .ODEP(ODEP),
              .LANES(LANES), .SEGW(SEGW)) u_ctrl (
    .clk, .rst_n,
    .cfg_we(prog_sel && prog_kind == 2'd0), .cfg_addr(prog_addr[7:0]),
    .cfg_wdata(prog_data[31:0]),
    .xb_mode, .seg_sel, .blk_mask, .node_mode,
    .rx_flit, .rx_valid, .rx_ready, .tx_flit, .tx_valid, .tx_ready,
    .ib_we, .ib_waddr, .ib_wdata, .ib_re, .ib_raddr, .ib_rdata,
    .ob_we, .ob_waddr, .ob_wdata, .ob_re, .ob_raddr, .ob_rdata,
    .xa_in_we, .xa_in_seg, .xa_in_addr, .xa_in_data, .xa_start,
    .xa_out_valid, .xa_out_data, .xa_out_last, .xa_out_ready,
    .sf_cmd_valid, .sf_cmd_op, .sf_cmd_scalar, .sf_cmd_ready, .sf_acc_clr,
    .sf_in_valid, .sf_in_data, .sf_in_last, .sf_in_ready,
    .sf_out_valid, .sf_out_data, .sf_out_last, .sf_out_ready, .sf_done,
    .tok_in, .tok_out, .overlap_cnt
  );

  for (genvar b = 0; b < 2; b++) begin : g_buf
    act_buffer #(.DEPTH(IDEP), .W(LINK_W)) u_ibuf (
      .clk, .we(ib_we[b]), .waddr(ib_waddr), .wdata(ib_wdata),
      .re(ib_re[b]), .raddr(ib_raddr), .rdata(ib_rdata[b]));
    act_buffer #(.DEPTH(ODEP), .W(LINK_W)) u_obuf (
      .clk, .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata[b]),
      .re(ob_re), .raddr(ob_raddr), .rdata(ob_rdata[b]));
  end

  xb_array #(.N_XB(N_XB), .ROWS(ROWS), .COLS(COLS), .BANKS(BANKS), .NBLK(NBLK),
             .W(1024), .SEGW(SEGW)) u_xa (
    .clk, .rst_n, .xb_mode, .seg_sel, .blk_mask, .node_mode,
    .wr_en(prog_sel && prog_kind == 2'd1), .wr_xb(prog_addr[10 +: $clog2(N_XB)]),
    .wr_row(prog_addr[$clog2(ROWS)-1:0]), .wr_data(prog_data), .wr_be(prog_be),
    .blk_clr(prog_sel && prog_kind == 2'd3), .blk_app(prog_sel && prog_kind == 2'd2),
    .blk_xb(prog_addr[10 +: $clog2(N_XB)]), .blk_idx(prog_addr[$clog2(NBLK)-1:0]),
    .blk_slot, .blk_full,
    .in_we(xa_in_we), .in_seg(xa_in_seg), .in_addr(xa_in_addr), .in_data(xa_in_data),
    .start(xa_start), .busy(xa_busy), .done(xa_done),
    .out_valid(xa_out_valid), .out_data(xa_out_data), .out_last(xa_out_last),
    .out_ready(xa_out_ready)
  );

  sfu #(.LANES(LANES), .BUF_BYTES(SFU_BYTES)) u_sfu (
    .clk, .rst_n,
    .cmd_valid(sf_cmd_valid), .cmd_op(sf_cmd_op), .cmd_scalar(sf_cmd_scalar),
    .cmd_ready(sf_cmd_ready), .acc_clr(sf_acc_clr),
    .in_valid(sf_in_valid), .in_data(sf_in_data), .in_last(sf_in_last), .in_ready(sf_in_ready),
    .out_valid(sf_out_valid), .out_data(sf_out_data), .out_last(sf_out_last),
    .out_ready(sf_out_ready), .acc(sf_acc), .scalar_out(sf_scalar_out), .done(sf_done)
  );
endmodule
