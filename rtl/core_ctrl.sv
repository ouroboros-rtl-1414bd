// core_ctrl: control unit of a CIM core. It holds the core's configuration
// registers and runs three cooperating sequences:
//  * receive (synchronisation registers + address generation): flits of an
//    incoming token are written into the free half of the ping-pong input buffer;
//    the packet's 'last' flit closes the half, counts a received token and flips
//    to the other half, so the next token can arrive while this one computes.
//  * pipeline control: a filled half is read out word by word and broadcast to the
//    crossbars (word i goes to segment i/WPS, offset i%WPS), the crossbar array is
//    started, and its H-tree result (1024-bit flits of 32 partial sums) is packed
//    two flits at a time into 64-lane SFU vectors. The SFU applies the configured
//    operation; for softmax (EXP_ACC) a second NORM pass divides by the sum. Each
//    SFU result is requantised (arithmetic shift right by 'qshift', saturated to
//    int8) and written as an even/odd word pair into the output buffer.
//  * send: the output buffer is read out and sent as one packet to the configured
//    destination core; a sent token is counted.
// The block split (sync. registers, KV control, address generator, pipeline
// control) follows the architecture; the register map, the requantisation and
// the strictly sequential compute/send order are this design's choices.
// Configuration port (cfg_we, cfg_addr, cfg_wdata):
//   0x00 dest x [7:0], dest y [15:8]   0x01 qshift [4:0]
//   0x02 sfu op [2:0]                  0x03 sfu scalar (Q16.16)
//   0x40+x crossbar x: mode [1:0], segment [9:2], logical-block mask [17:10]
//   0x80+n H-tree node n mode [0] (1 = concatenate)
module core_ctrl
  import ouro_pkg::*;
#(
  parameter int N_XB  = 32,
  parameter int ROWS  = 1024,
  parameter int NBLK  = 8,
  parameter int IDEP  = 2048,    // words per input-buffer half
  parameter int ODEP  = 512,     // words per output-buffer half (even/odd)
  parameter int LANES = 64,
  parameter int SEGW  = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration
  input  logic                     cfg_we,
  input  logic [7:0]               cfg_addr,
  input  logic [31:0]              cfg_wdata,
  output xb_mode_e                 xb_mode  [N_XB],
  output logic [SEGW-1:0]          seg_sel  [N_XB],
  output logic [NBLK-1:0]          blk_mask [N_XB],
  output node_mode_e               node_mode [N_XB],
  // network
  input  flit_t                    rx_flit,
  input  logic                     rx_valid,
  output logic                     rx_ready,
  output flit_t                    tx_flit,
  output logic                     tx_valid,
  input  logic                     tx_ready,
  // input buffer halves
  output logic                     ib_we [2],
  output logic [$clog2(IDEP)-1:0]  ib_waddr,
  output logic [LINK_W-1:0]        ib_wdata,
  output logic                     ib_re [2],
  output logic [$clog2(IDEP)-1:0]  ib_raddr,
  input  logic [LINK_W-1:0]        ib_rdata [2],
  // output buffer halves (0 = even words, 1 = odd words)
  output logic                     ob_we,
  output logic [$clog2(ODEP)-1:0]  ob_waddr,
  output logic [LINK_W-1:0]        ob_wdata [2],
  output logic                     ob_re,
  output logic [$clog2(ODEP)-1:0]  ob_raddr,
  input  logic [LINK_W-1:0]        ob_rdata [2],
  // crossbar array
  output logic                     xa_in_we,
  output logic [SEGW-1:0]          xa_in_seg,
  output logic [$clog2(ROWS*8/LINK_W)-1:0] xa_in_addr,
  output logic [LINK_W-1:0]        xa_in_data,
  output logic                     xa_start,
  input  logic                     xa_out_valid,
  input  logic [1023:0]            xa_out_data,
  input  logic                     xa_out_last,
  output logic                     xa_out_ready,
  // SFU
  output logic                     sf_cmd_valid,
  output sfu_op_e                  sf_cmd_op,
  output logic signed [31:0]       sf_cmd_scalar,
  input  logic                     sf_cmd_ready,
  output logic                     sf_acc_clr,
  output logic                     sf_in_valid,
  output logic signed [31:0]       sf_in_data [LANES],
  output logic                     sf_in_last,
  input  logic                     sf_in_ready,
  input  logic                     sf_out_valid,
  input  logic signed [31:0]       sf_out_data [LANES],
  input  logic                     sf_out_last,
  output logic                     sf_out_ready,
  input  logic                     sf_done,
  // synchronisation registers (status)
  output logic [31:0]              tok_in,
  output logic [31:0]              tok_out,
  output logic [31:0]              overlap_cnt   // tokens received while computing
);
  localparam int WPS = ROWS * 8 / LINK_W;     // load words per crossbar segment
  localparam int IAW = $clog2(IDEP);
  localparam int OAW = $clog2(ODEP);

  // ---------------- configuration registers ----------------
  logic [COORD_W-1:0] dest_x, dest_y;
  logic [4:0]         qshift;
  sfu_op_e            op_cfg;
  logic signed [31:0] scal_cfg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dest_x <= '0; dest_y <= '0; qshift <= '0; op_cfg <= SFU_PASS; scal_cfg <= '0;
      for (int x = 0; x < N_XB; x++) begin
        xb_mode[x] <= XB_FFN; seg_sel[x] <= SEGW'(x); blk_mask[x] <= '1;
        node_mode[x] <= NODE_REDUCE;
      end
    end else if (cfg_we) begin
      if (cfg_addr == 8'h00) begin dest_x <= cfg_wdata[7:0]; dest_y <= cfg_wdata[15:8]; end
      if (cfg_addr == 8'h01) qshift   <= cfg_wdata[4:0];
      if (cfg_addr == 8'h02) op_cfg   <= sfu_op_e'(cfg_wdata[2:0]);
      if (cfg_addr == 8'h03) scal_cfg <= cfg_wdata;
      for (int x = 0; x < N_XB; x++) begin
        if (cfg_addr == 8'(8'h40 + x)) begin
          xb_mode[x]  <= xb_mode_e'(cfg_wdata[1:0]);
          seg_sel[x]  <= cfg_wdata[2 +: SEGW];
          blk_mask[x] <= cfg_wdata[10 +: NBLK];
        end
        if (cfg_addr == 8'(8'h80 + x)) node_mode[x] <= node_mode_e'(cfg_wdata[0]);
      end
    end
  end

  // ---------------- receive into the ping-pong input buffer ----------------
  logic           wbank, cbank;
  logic           full [2];
  logic [IAW:0]   len  [2];
  logic [IAW-1:0] wcnt;
  logic           computing;

  assign rx_ready = !full[wbank];
  assign ib_waddr = wcnt;
  assign ib_wdata = rx_flit.data;
  always_comb begin
    ib_we[0] = rx_valid && rx_ready && !wbank;
    ib_we[1] = rx_valid && rx_ready &&  wbank;
  end

  logic release_bank;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank <= 1'b0; wcnt <= '0; tok_in <= '0; overlap_cnt <= '0;
      full[0] <= 1'b0; full[1] <= 1'b0; len[0] <= '0; len[1] <= '0;
    end else begin
      if (rx_valid && rx_ready) begin
        wcnt <= wcnt + 1'b1;
        if (rx_flit.last) begin
          full[wbank] <= 1'b1;
          len[wbank]  <= {1'b0, wcnt} + 1'b1;
          wbank       <= !wbank;
          wcnt        <= '0;
          tok_in      <= tok_in + 1;
          if (computing) overlap_cnt <= overlap_cnt + 1;
        end
      end
      if (release_bank) full[cbank] <= 1'b0;
    end
  end

  // ---------------- pipeline control ----------------
  typedef enum logic [3:0] {
    C_IDLE, C_LOAD, C_START, C_CMD, C_DRAIN, C_NCMD, C_NORM, C_SEND_RD, C_SEND_TX
  } cst_e;
  cst_e st;

  logic [IAW:0]    lcnt;       // load words issued
  logic            ld_v;       // read data valid this cycle
  logic [IAW-1:0]  ld_a;       // address of that data
  logic            half_v;     // first flit of a pair held
  logic [1023:0]   half_d;
  logic [OAW-1:0]  owcnt;      // output word pairs written
  logic [OAW:0]    scnt;       // words sent
  logic [LINK_W-1:0] tx_d;

  assign computing = (st != C_IDLE);

  // requantisation of SFU results into the two output-buffer halves
  function automatic logic [7:0] rq(input logic signed [31:0] v, input logic [4:0] sh);
    logic signed [31:0] s;
    s = v >>> sh;
    if (s > 127)       return 8'h7f;
    else if (s < -128) return 8'h80;
    else               return s[7:0];
  endfunction

  always_comb begin
    sf_out_ready = (st == C_DRAIN || st == C_NORM);
    for (int i = 0; i < LANES / 2; i++) begin
      ob_wdata[0][i*8 +: 8] = rq(sf_out_data[i], qshift);
      ob_wdata[1][i*8 +: 8] = rq(sf_out_data[LANES/2 + i], qshift);
    end
    ob_waddr = owcnt;
    ob_we    = sf_out_valid && sf_out_ready;
  end

  // crossbar broadcast from the input buffer
  always_comb begin
    ib_raddr  = lcnt[IAW-1:0];
    ib_re[0]  = (st == C_LOAD) && lcnt < len[cbank] && !cbank;
    ib_re[1]  = (st == C_LOAD) && lcnt < len[cbank] &&  cbank;
    xa_in_we   = ld_v;
    xa_in_seg  = SEGW'(int'(ld_a) / WPS);
    xa_in_addr = ($clog2(WPS))'(int'(ld_a) % WPS);
    xa_in_data = ib_rdata[cbank];
    xa_start   = (st == C_START);
  end

  // SFU stream: pairs of H-tree flits form one 64-lane vector
  always_comb begin
    sf_cmd_valid  = (st == C_CMD) || (st == C_NCMD);
    sf_cmd_op     = (st == C_NCMD) ? SFU_NORM : op_cfg;
    sf_cmd_scalar = scal_cfg;
    sf_acc_clr    = (st == C_START);
    sf_in_valid   = (st == C_DRAIN) && half_v && xa_out_valid;
    sf_in_last    = xa_out_last;
    for (int i = 0; i < LANES / 2; i++) begin
      sf_in_data[i]             = half_d[i*32 +: 32];
      sf_in_data[LANES / 2 + i] = xa_out_data[i*32 +: 32];
    end
    xa_out_ready  = (st == C_DRAIN) && (!half_v || sf_in_ready);
  end

  // send
  always_comb begin
    ob_re    = (st == C_SEND_RD);
    ob_raddr = scnt[OAW:1];
    tx_valid = (st == C_SEND_TX);
    tx_flit  = '{dx: dest_x, dy: dest_y, last: (scnt == {owcnt, 1'b0} - 1'b1), data: tx_d};
    release_bank = (st == C_DRAIN || st == C_NORM) && sf_done && !(st == C_DRAIN && op_cfg == SFU_EXP_ACC);
  end
  assign tx_d = ob_rdata[scnt[0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; cbank <= 1'b0; lcnt <= '0; ld_v <= 1'b0; ld_a <= '0;
      half_v <= 1'b0; half_d <= '0; owcnt <= '0; scnt <= '0; tok_out <= '0;
    end else begin
      ld_v <= 1'b0;
      unique case (st)
        C_IDLE: if (full[cbank]) begin st <= C_LOAD; lcnt <= '0; end
        C_LOAD: begin
          if (lcnt < len[cbank]) begin
            ld_v <= 1'b1;
            ld_a <= lcnt[IAW-1:0];
            lcnt <= lcnt + 1'b1;
          end else if (!ld_v) st <= C_START;
        end
        C_START: begin st <= C_CMD; owcnt <= '0; half_v <= 1'b0; end
        C_CMD:   if (sf_cmd_ready) st <= C_DRAIN;
        C_DRAIN: begin
          if (xa_out_valid && xa_out_ready) begin
            if (!half_v) begin half_v <= 1'b1; half_d <= xa_out_data; end
            else half_v <= 1'b0;
          end
          if (ob_we) owcnt <= owcnt + 1'b1;
          if (sf_done) st <= (op_cfg == SFU_EXP_ACC) ? C_NCMD : C_SEND_RD;
        end
        C_NCMD: if (sf_cmd_ready) st <= C_NORM;
        C_NORM: begin
          if (ob_we) owcnt <= owcnt + 1'b1;
          if (sf_done) st <= C_SEND_RD;
        end
        C_SEND_RD: st <= C_SEND_TX;
        C_SEND_TX: if (tx_ready) begin
          if (tx_flit.last) begin
            st      <= C_IDLE;
            scnt    <= '0;
            cbank   <= !cbank;
            tok_out <= tok_out + 1;
          end else begin
            scnt <= scnt + 1'b1;
            st   <= C_SEND_RD;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // an H-tree result must consist of whole flit pairs
  assert property (@(posedge clk) disable iff (!rst_n)
                   (xa_out_valid && xa_out_ready && xa_out_last) |-> half_v)
    else $error("core_ctrl: odd number of H-tree flits");
endmodule
