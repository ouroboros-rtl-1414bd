// htree_noc: the binary H-tree that joins the NLEAF crossbars of a core.
// Leaves are the crossbars' output streams; each of the NLEAF-1 inner nodes is an
// htree_node whose reduce/concatenate mode is given by node_mode (heap order:
// node 1 is the root, node i has children 2i and 2i+1, leaf j is heap index
// NLEAF+j). A tree configured with reductions near the leaves and concatenations
// near the root keeps packets short on the lower links, which is what the
// intra-core mapping aims for. The link width is the same at every level.
// Interface: per-leaf valid/data/last/ready streams in, one root stream out.
module htree_noc
  import ouro_pkg::*;
#(
  parameter int NLEAF = 32,
  parameter int W     = 1024,
  parameter int PSW   = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  node_mode_e   node_mode [NLEAF],   // index 1..NLEAF-1 used, 0 ignored
  input  logic         leaf_valid [NLEAF],
  input  logic [W-1:0] leaf_data  [NLEAF],
  input  logic         leaf_last  [NLEAF],
  output logic         leaf_ready [NLEAF],
  output logic         root_valid,
  output logic [W-1:0] root_data,
  output logic         root_last,
  input  logic         root_ready
);
  // heap-indexed link signals, 1..2*NLEAF-1
  logic         v [2*NLEAF];
  logic [W-1:0] d [2*NLEAF];
  logic         l [2*NLEAF];
  logic         r [2*NLEAF];

  for (genvar j = 0; j < NLEAF; j++) begin : g_leaf
    assign v[NLEAF+j]     = leaf_valid[j];
    assign d[NLEAF+j]     = leaf_data[j];
    assign l[NLEAF+j]     = leaf_last[j];
    assign leaf_ready[j]  = r[NLEAF+j];
  end

  for (genvar n = 1; n < NLEAF; n++) begin : g_node
    htree_node #(.W(W), .PSW(PSW)) u_node (
      .clk, .rst_n, .mode(node_mode[n]),
      .a_valid(v[2*n]),   .a_data(d[2*n]),   .a_last(l[2*n]),   .a_ready(r[2*n]),
      .b_valid(v[2*n+1]), .b_data(d[2*n+1]), .b_last(l[2*n+1]), .b_ready(r[2*n+1]),
      .y_valid(v[n]),     .y_data(d[n]),     .y_last(l[n]),     .y_ready(r[n])
    );
  end

  assign root_valid = v[1];
  assign root_data  = d[1];
  assign root_last  = l[1];
  assign r[1]       = root_ready;
  assign v[0] = 1'b0;
  assign d[0] = '0;
  assign l[0] = 1'b0;
  assign r[0] = 1'b0;
endmodule
