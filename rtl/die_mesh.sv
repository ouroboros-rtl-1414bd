// die_mesh: one die, a CX x CY grid of CIM cores, each attached to the local port
// of a mesh router; neighbouring routers are joined by 256-bit links in all four
// directions. Links on the die boundary leave the die as ports, so dies placed
// side by side (reticle stitching) form one continuous wafer mesh. Core
// coordinates are global: core (c,r) of a die at origin (ox,oy) has mesh address
// (ox+c, oy+r), and packets are routed on those addresses.
// Programming: a broadcast bus addressed by (prog_x, prog_y) reaches every core;
// fault_we writes the link_down mask of router (fault_x, fault_y), which is how
// failed links are routed around. The core at (prog_x, prog_y) returns its free
// block table answer on blk_slot/blk_full and its token counters on st_*.
// The architecture's die is 13 x 17 cores; the default here is 2 x 1 because a
// full-size core takes a few GB to elaborate. The side-band programming bus and the
// status multiplexer are this design's choices.
module die_mesh
  import ouro_pkg::*;
#(
  parameter int CX    = 2,
  parameter int CY    = 1,
  parameter int N_XB  = 32,
  parameter int ROWS  = 1024,
  parameter int COLS  = 128,
  parameter int BANKS = 32,
  parameter int IDEP  = 2048,
  parameter int ODEP  = 512,
  parameter int LANES = 64,
  parameter int SFU_BYTES = 10240
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] ox,
  input  logic [COORD_W-1:0] oy,
  // programming
  input  logic               prog_en,
  input  logic [COORD_W-1:0] prog_x,
  input  logic [COORD_W-1:0] prog_y,
  input  logic [1:0]         prog_kind,
  input  logic [19:0]        prog_addr,
  input  logic [COLS*8-1:0]  prog_data,
  input  logic [COLS-1:0]    prog_be,
  output logic               prog_hit,
  output logic [7:0]         blk_slot,
  output logic               blk_full,
  output logic [31:0]        st_tok_in,
  output logic [31:0]        st_tok_out,
  output logic [31:0]        st_overlap,
  input  logic               fault_we,
  input  logic [COORD_W-1:0] fault_x,
  input  logic [COORD_W-1:0] fault_y,
  input  logic [4:0]         fault_mask,
  // die edges: index along the edge
  input  flit_t              n_in_flit  [CX], input logic n_in_valid [CX], output logic n_in_ready [CX],
  output flit_t              n_out_flit [CX], output logic n_out_valid[CX], input  logic n_out_ready[CX],
  input  flit_t              s_in_flit  [CX], input logic s_in_valid [CX], output logic s_in_ready [CX],
  output flit_t              s_out_flit [CX], output logic s_out_valid[CX], input  logic s_out_ready[CX],
  input  flit_t              w_in_flit  [CY], input logic w_in_valid [CY], output logic w_in_ready [CY],
  output flit_t              w_out_flit [CY], output logic w_out_valid[CY], input  logic w_out_ready[CY],
  input  flit_t              e_in_flit  [CY], input logic e_in_valid [CY], output logic e_in_ready [CY],
  output flit_t              e_out_flit [CY], output logic e_out_valid[CY], input  logic e_out_ready[CY]
);
  // router port signals, [row][col][port]
  flit_t rin_f  [CY][CX][5];
  logic  rin_v  [CY][CX][5];
  logic  rin_r  [CY][CX][5];
  flit_t rout_f [CY][CX][5];
  logic  rout_v [CY][CX][5];
  logic  rout_r [CY][CX][5];

  logic [7:0]  slot_a [CY][CX];
  logic        full_a [CY][CX];
  logic [31:0] ti_a [CY][CX];
  logic [31:0] to_a [CY][CX];
  logic [31:0] ov_a [CY][CX];

  for (genvar r = 0; r < CY; r++) begin : g_r
    for (genvar c = 0; c < CX; c++) begin : g_c
      logic [COORD_W-1:0] mx, my;
      logic [4:0]         ldown;
      logic               sel;
      assign mx  = ox + COORD_W'(c);
      assign my  = oy + COORD_W'(r);
      assign sel = prog_en && prog_x == mx && prog_y == my;

      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) ldown <= '0;
        else if (fault_we && fault_x == mx && fault_y == my) ldown <= fault_mask;

      mesh_router u_rt (
        .clk, .rst_n, .my_x(mx), .my_y(my), .link_down(ldown),
        .in_flit(rin_f[r][c]), .in_valid(rin_v[r][c]), .in_ready(rin_r[r][c]),
        .out_flit(rout_f[r][c]), .out_valid(rout_v[r][c]), .out_ready(rout_r[r][c])
      );

      cim_core #(.N_XB(N_XB), .ROWS(ROWS), .COLS(COLS), .BANKS(BANKS), .IDEP(IDEP),
                 .ODEP(ODEP), .LANES(LANES), .SFU_BYTES(SFU_BYTES)) u_core (
        .clk, .rst_n,
        .prog_sel(sel), .prog_kind, .prog_addr, .prog_data, .prog_be,
        .blk_slot(slot_a[r][c]), .blk_full(full_a[r][c]),
        .rx_flit(rout_f[r][c][P_LOCAL]), .rx_valid(rout_v[r][c][P_LOCAL]),
        .rx_ready(rout_r[r][c][P_LOCAL]),
        .tx_flit(rin_f[r][c][P_LOCAL]), .tx_valid(rin_v[r][c][P_LOCAL]),
        .tx_ready(rin_r[r][c][P_LOCAL]),
        .tok_in(ti_a[r][c]), .tok_out(to_a[r][c]), .overlap_cnt(ov_a[r][c])
      );

      // north neighbour (row r-1) or die edge
      if (r > 0) begin : g_n
        assign rin_f[r][c][P_NORTH]  = rout_f[r-1][c][P_SOUTH];
        assign rin_v[r][c][P_NORTH]  = rout_v[r-1][c][P_SOUTH];
        assign rout_r[r-1][c][P_SOUTH] = rin_r[r][c][P_NORTH];
      end else begin : g_ne
        assign rin_f[r][c][P_NORTH] = n_in_flit[c];
        assign rin_v[r][c][P_NORTH] = n_in_valid[c];
        assign n_in_ready[c]        = rin_r[r][c][P_NORTH];
        assign n_out_flit[c]        = rout_f[r][c][P_NORTH];
        assign n_out_valid[c]       = rout_v[r][c][P_NORTH];
        assign rout_r[r][c][P_NORTH] = n_out_ready[c];
      end
      if (r < CY - 1) begin : g_s
        assign rin_f[r][c][P_SOUTH]  = rout_f[r+1][c][P_NORTH];
        assign rin_v[r][c][P_SOUTH]  = rout_v[r+1][c][P_NORTH];
        assign rout_r[r+1][c][P_NORTH] = rin_r[r][c][P_SOUTH];
      end else begin : g_se
        assign rin_f[r][c][P_SOUTH] = s_in_flit[c];
        assign rin_v[r][c][P_SOUTH] = s_in_valid[c];
        assign s_in_ready[c]        = rin_r[r][c][P_SOUTH];
        assign s_out_flit[c]        = rout_f[r][c][P_SOUTH];
        assign s_out_valid[c]       = rout_v[r][c][P_SOUTH];
        assign rout_r[r][c][P_SOUTH] = s_out_ready[c];
      end
      if (c > 0) begin : g_w
        assign rin_f[r][c][P_WEST]  = rout_f[r][c-1][P_EAST];
        assign rin_v[r][c][P_WEST]  = rout_v[r][c-1][P_EAST];
        assign rout_r[r][c-1][P_EAST] = rin_r[r][c][P_WEST];
      end else begin : g_we
        assign rin_f[r][c][P_WEST] = w_in_flit[r];
        assign rin_v[r][c][P_WEST] = w_in_valid[r];
        assign w_in_ready[r]       = rin_r[r][c][P_WEST];
        assign w_out_flit[r]       = rout_f[r][c][P_WEST];
        assign w_out_valid[r]      = rout_v[r][c][P_WEST];
        assign rout_r[r][c][P_WEST] = w_out_ready[r];
      end
      if (c < CX - 1) begin : g_e
        assign rin_f[r][c][P_EAST]  = rout_f[r][c+1][P_WEST];
        assign rin_v[r][c][P_EAST]  = rout_v[r][c+1][P_WEST];
        assign rout_r[r][c+1][P_WEST] = rin_r[r][c][P_EAST];
      end else begin : g_ee
        assign rin_f[r][c][P_EAST] = e_in_flit[r];
        assign rin_v[r][c][P_EAST] = e_in_valid[r];
        assign e_in_ready[r]       = rin_r[r][c][P_EAST];
        assign e_out_flit[r]       = rout_f[r][c][P_EAST];
        assign e_out_valid[r]      = rout_v[r][c][P_EAST];
        assign rout_r[r][c][P_EAST] = e_out_ready[r];
      end
    end
  end

  // status / response of the addressed core
  always_comb begin
    prog_hit = 1'b0; blk_slot = '0; blk_full = 1'b0;
    st_tok_in = '0; st_tok_out = '0; st_overlap = '0;
    for (int r = 0; r < CY; r++)
      for (int c = 0; c < CX; c++)
        if (prog_x == ox + COORD_W'(c) && prog_y == oy + COORD_W'(r)) begin
          prog_hit   = 1'b1;
          blk_slot   = slot_a[r][c];
          blk_full   = full_a[r][c];
          st_tok_in  = ti_a[r][c];
          st_tok_out = to_a[r][c];
          st_overlap = ov_a[r][c];
        end
  end
endmodule
