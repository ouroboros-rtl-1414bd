// mesh_router: router of the core mesh (on a die and, through stitched die edges,
// across the whole wafer). Five ports: the local core and the four neighbours,
// each carrying 256-bit flits with a destination header (ouro_pkg::flit_t).
// Every input has a FIFO of DEPTH flits. A packet goes east/west until its x
// coordinate matches, then north/south (dimension-order routing, y grows towards
// SOUTH). link_down marks neighbour links that failed: if the dimension-order
// port of a packet is down and the packet still has to move in the other
// dimension, it takes that dimension first, so faulty links are routed around
// by reconfiguring the router rather than the cores. Each output is held by one
// input from a packet's first flit to its 'last' flit (wormhole switching) and
// granted round-robin between packets.
// Link width follows the architecture. The network simulated for the
// architecture has eight virtual channels of depth four per router; this router
// has one channel of depth DEPTH per input and no deadlock-avoidance turn rule
// for detours, which are simplifications of this design.
// Timing: a flit at the head of an input FIFO crosses the switch in the cycle it
// is granted; out_valid/out_ready is a plain handshake per output.
module mesh_router
  import ouro_pkg::*;
#(
  parameter int DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic [4:0]         link_down,   // per port_e, 1 = do not use
  input  flit_t              in_flit  [5],
  input  logic               in_valid [5],
  output logic               in_ready [5],
  output flit_t              out_flit  [5],
  output logic               out_valid [5],
  input  logic               out_ready [5]
);
  localparam int AW = $clog2(DEPTH);

  // ---------------- input FIFOs ----------------
  flit_t          fifo  [5][DEPTH];
  logic [AW-1:0]  rd    [5];
  logic [AW-1:0]  wr    [5];
  logic [AW:0]    cnt   [5];
  logic           pop   [5];
  flit_t          head  [5];
  logic           hvalid[5];

  always_comb
    for (int p = 0; p < 5; p++) begin
      in_ready[p] = (cnt[p] != (AW+1)'(DEPTH));
      head[p]     = fifo[p][rd[p]];
      hvalid[p]   = (cnt[p] != '0);
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < 5; p++) begin rd[p] <= '0; wr[p] <= '0; cnt[p] <= '0; end
    end else begin
      for (int p = 0; p < 5; p++) begin
        automatic logic push = in_valid[p] && in_ready[p];
        if (push) begin
          fifo[p][wr[p]] <= in_flit[p];
          wr[p] <= wr[p] + 1'b1;
        end
        if (pop[p]) rd[p] <= rd[p] + 1'b1;
        cnt[p] <= cnt[p] + (AW+1)'(push) - (AW+1)'(pop[p]);
      end
    end
  end

  // ---------------- route computation ----------------
  logic [2:0] want [5];
  always_comb
    for (int p = 0; p < 5; p++) begin
      automatic logic [2:0] xdir = P_LOCAL, ydir = P_LOCAL;
      if      (head[p].dx > my_x) xdir = P_EAST;
      else if (head[p].dx < my_x) xdir = P_WEST;
      if      (head[p].dy > my_y) ydir = P_SOUTH;
      else if (head[p].dy < my_y) ydir = P_NORTH;
      if (xdir != P_LOCAL)
        want[p] = (link_down[xdir] && ydir != P_LOCAL) ? ydir : xdir;
      else
        want[p] = ydir;
    end

  // ---------------- switch allocation ----------------
  logic       locked [5];     // output held by a packet
  logic [2:0] owner  [5];     // input that holds the output
  logic [2:0] rr     [5];     // round-robin pointer
  logic       gnt    [5];     // output o granted this cycle
  logic [2:0] gsel   [5];

  always_comb begin
    for (int o = 0; o < 5; o++) begin
      gnt[o]  = 1'b0;
      gsel[o] = owner[o];
      if (locked[o]) begin
        gnt[o] = hvalid[owner[o]] && want[owner[o]] == 3'(o);
      end else begin
        for (int k = 4; k >= 0; k--) begin
          automatic int i = (int'(rr[o]) + k) % 5;
          if (hvalid[i] && want[i] == 3'(o)) begin gnt[o] = 1'b1; gsel[o] = 3'(i); end
        end
      end
      out_valid[o] = gnt[o];
      out_flit[o]  = head[gsel[o]];
    end
    for (int p = 0; p < 5; p++) begin
      pop[p] = 1'b0;
      for (int o = 0; o < 5; o++)
        if (gnt[o] && gsel[o] == 3'(p) && out_ready[o]) pop[p] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < 5; o++) begin locked[o] <= 1'b0; owner[o] <= '0; rr[o] <= '0; end
    end else begin
      for (int o = 0; o < 5; o++)
        if (gnt[o] && out_ready[o]) begin
          owner[o]  <= gsel[o];
          locked[o] <= !head[gsel[o]].last;
          if (head[gsel[o]].last) rr[o] <= (gsel[o] == 3'd4) ? 3'd0 : gsel[o] + 1'b1;
        end
    end
  end
endmodule
