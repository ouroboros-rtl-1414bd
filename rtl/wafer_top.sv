// wafer_top: the wafer, DY rows x DX columns of identical dies stitched into one
// mesh of (DX*CX) x (DY*CY) CIM cores. Die (i,j) sits at mesh origin
// (j*CX, i*CY); the boundary links of neighbouring dies are wired directly, which
// models reticle stitching. Pipeline stages of a model are placed on cores by an
// offline mapping, and activations travel from stage to stage as packets on this
// mesh (a serpentine order over the dies keeps consecutive stages adjacent, but
// that order lives in the per-core destination registers, not in wiring).
// The links on the wafer boundary are brought out as ports: that is where the
// inter-wafer interface (optical Ethernet, not part of this RTL) attaches and how
// a testbench injects and collects tokens. The programming bus, fault-mask port
// and status read-back are broadcast to all dies.
// Die and core-grid counts of the architecture are 9 x 7 dies of 13 x 17 cores; the
// defaults here are 2 x 1 dies of one core, because elaborating a full-size core
// takes a few GB in lint and synthesis tools (see the top-level documentation).
module wafer_top
  import ouro_pkg::*;
#(
  parameter int DX    = 2,
  parameter int DY    = 1,
  parameter int CX    = 1,
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
  // programming and status
  input  logic               prog_en,
  input  logic [COORD_W-1:0] prog_x,
  input  logic [COORD_W-1:0] prog_y,
  input  logic [1:0]         prog_kind,
  input  logic [19:0]        prog_addr,
  input  logic [COLS*8-1:0]  prog_data,
  input  logic [COLS-1:0]    prog_be,
  output logic [7:0]         blk_slot,
  output logic               blk_full,
  output logic [31:0]        st_tok_in,
  output logic [31:0]        st_tok_out,
  output logic [31:0]        st_overlap,
  input  logic               fault_we,
  input  logic [COORD_W-1:0] fault_x,
  input  logic [COORD_W-1:0] fault_y,
  input  logic [4:0]         fault_mask,
  // wafer boundary links (inter-wafer interface side)
  input  flit_t n_in_flit  [DX*CX], input  logic n_in_valid  [DX*CX], output logic n_in_ready  [DX*CX],
  output flit_t n_out_flit [DX*CX], output logic n_out_valid [DX*CX], input  logic n_out_ready [DX*CX],
  input  flit_t s_in_flit  [DX*CX], input  logic s_in_valid  [DX*CX], output logic s_in_ready  [DX*CX],
  output flit_t s_out_flit [DX*CX], output logic s_out_valid [DX*CX], input  logic s_out_ready [DX*CX],
  input  flit_t w_in_flit  [DY*CY], input  logic w_in_valid  [DY*CY], output logic w_in_ready  [DY*CY],
  output flit_t w_out_flit [DY*CY], output logic w_out_valid [DY*CY], input  logic w_out_ready [DY*CY],
  input  flit_t e_in_flit  [DY*CY], input  logic e_in_valid  [DY*CY], output logic e_in_ready  [DY*CY],
  output flit_t e_out_flit [DY*CY], output logic e_out_valid [DY*CY], input  logic e_out_ready [DY*CY]
);
  // vertical seams: [die row boundary 0..DY][wafer column]; horizontal: [col boundary 0..DX][wafer row]
  // dn_* carries flits southwards across a seam, up_* northwards; rt_* eastwards, lf_* westwards
  flit_t dn_f [DY+1][DX*CX]; logic dn_v [DY+1][DX*CX]; logic dn_r [DY+1][DX*CX];
  flit_t up_f [DY+1][DX*CX]; logic up_v [DY+1][DX*CX]; logic up_r [DY+1][DX*CX];
  flit_t rt_f [DX+1][DY*CY]; logic rt_v [DX+1][DY*CY]; logic rt_r [DX+1][DY*CY];
  flit_t lf_f [DX+1][DY*CY]; logic lf_v [DX+1][DY*CY]; logic lf_r [DX+1][DY*CY];

  logic        hit  [DY][DX];
  logic [7:0]  slot [DY][DX];
  logic        full [DY][DX];
  logic [31:0] ti [DY][DX];
  logic [31:0] to [DY][DX];
  logic [31:0] ov [DY][DX];

  // wafer boundary
  for (genvar x = 0; x < DX*CX; x++) begin : g_ns
    assign dn_f[0][x] = n_in_flit[x];  assign dn_v[0][x] = n_in_valid[x];  assign n_in_ready[x] = dn_r[0][x];
    assign n_out_flit[x] = up_f[0][x]; assign n_out_valid[x] = up_v[0][x]; assign up_r[0][x] = n_out_ready[x];
    assign up_f[DY][x] = s_in_flit[x]; assign up_v[DY][x] = s_in_valid[x]; assign s_in_ready[x] = up_r[DY][x];
    assign s_out_flit[x] = dn_f[DY][x]; assign s_out_valid[x] = dn_v[DY][x]; assign dn_r[DY][x] = s_out_ready[x];
  end
  for (genvar y = 0; y < DY*CY; y++) begin : g_we
    assign rt_f[0][y] = w_in_flit[y];  assign rt_v[0][y] = w_in_valid[y];  assign w_in_ready[y] = rt_r[0][y];
    assign w_out_flit[y] = lf_f[0][y]; assign w_out_valid[y] = lf_v[0][y]; assign lf_r[0][y] = w_out_ready[y];
    assign lf_f[DX][y] = e_in_flit[y]; assign lf_v[DX][y] = e_in_valid[y]; assign e_in_ready[y] = lf_r[DX][y];
    assign e_out_flit[y] = rt_f[DX][y]; assign e_out_valid[y] = rt_v[DX][y]; assign rt_r[DX][y] = e_out_ready[y];
  end

  for (genvar i = 0; i < DY; i++) begin : g_dy
    for (genvar j = 0; j < DX; j++) begin : g_dx
      die_mesh #(.CX(CX), .CY(CY), .N_XB(N_XB), .ROWS(ROWS), .COLS(COLS), .BANKS(BANKS),
                 .IDEP(IDEP), .ODEP(ODEP), .LANES(LANES), .SFU_BYTES(SFU_BYTES)) u_die (
        .clk, .rst_n,
        .ox(COORD_W'(j*CX)), .oy(COORD_W'(i*CY)),
        .prog_en, .prog_x, .prog_y, .prog_kind, .prog_addr, .prog_data, .prog_be,
        .prog_hit(hit[i][j]), .blk_slot(slot[i][j]), .blk_full(full[i][j]),
        .st_tok_in(ti[i][j]), .st_tok_out(to[i][j]), .st_overlap(ov[i][j]),
        .fault_we, .fault_x, .fault_y, .fault_mask,
        .n_in_flit(dn_f[i][j*CX +: CX]),   .n_in_valid(dn_v[i][j*CX +: CX]),   .n_in_ready(dn_r[i][j*CX +: CX]),
        .n_out_flit(up_f[i][j*CX +: CX]),  .n_out_valid(up_v[i][j*CX +: CX]),  .n_out_ready(up_r[i][j*CX +: CX]),
        .s_in_flit(up_f[i+1][j*CX +: CX]), .s_in_valid(up_v[i+1][j*CX +: CX]), .s_in_ready(up_r[i+1][j*CX +: CX]),
        .s_out_flit(dn_f[i+1][j*CX +: CX]), .s_out_valid(dn_v[i+1][j*CX +: CX]), .s_out_ready(dn_r[i+1][j*CX +: CX]),
        .w_in_flit(rt_f[j][i*CY +: CY]),   .w_in_valid(rt_v[j][i*CY +: CY]),   .w_in_ready(rt_r[j][i*CY +: CY]),
        .w_out_flit(lf_f[j][i*CY +: CY]),  .w_out_valid(lf_v[j][i*CY +: CY]),  .w_out_ready(lf_r[j][i*CY +: CY]),
        .e_in_flit(lf_f[j+1][i*CY +: CY]), .e_in_valid(lf_v[j+1][i*CY +: CY]), .e_in_ready(lf_r[j+1][i*CY +: CY]),
        .e_out_flit(rt_f[j+1][i*CY +: CY]), .e_out_valid(rt_v[j+1][i*CY +: CY]), .e_out_ready(rt_r[j+1][i*CY +: CY])
      );
    end
  end

  always_comb begin
    blk_slot = '0; blk_full = 1'b0; st_tok_in = '0; st_tok_out = '0; st_overlap = '0;
    for (int i = 0; i < DY; i++)
      for (int j = 0; j < DX; j++)
        if (hit[i][j]) begin
          blk_slot = slot[i][j]; blk_full = full[i][j];
          st_tok_in = ti[i][j]; st_tok_out = to[i][j]; st_overlap = ov[i][j];
        end
  end
endmodule
