// htree_node: one convergence node of the crossbar H-tree inside a CIM core.
// Two child streams of W-bit flits (W/PSW partial sums of PSW bits each) meet
// here. In REDUCE mode the node adds the two children flit by flit, lane by lane,
// and forwards one packet of the same length: the children hold partial sums of
// the same output channels over different input channels. In CONCAT mode the node
// forwards the whole packet of child a and then the whole packet of child b: the
// children hold different output channels, so the packet doubles in length.
// The reduce/concatenate choice per node comes from the intra-core mapping, as
// in the binary-tree abstraction of the architecture; serialising a concatenated
// packet over the same link width, and the valid/ready/last handshake, are this
// design's choices. Flits pass combinationally (no storage in the node).
module htree_node
  import ouro_pkg::*;
#(
  parameter int W   = 1024,
  parameter int PSW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  node_mode_e    mode,
  input  logic          a_valid,
  input  logic [W-1:0]  a_data,
  input  logic          a_last,
  output logic          a_ready,
  input  logic          b_valid,
  input  logic [W-1:0]  b_data,
  input  logic          b_last,
  output logic          b_ready,
  output logic          y_valid,
  output logic [W-1:0]  y_data,
  output logic          y_last,
  input  logic          y_ready
);
  logic sel_b;   // CONCAT: 0 while forwarding child a, 1 while forwarding child b

  always_comb begin
    a_ready = 1'b0;
    b_ready = 1'b0;
    y_valid = 1'b0;
    y_data  = a_data;
    y_last  = 1'b0;
    if (mode == NODE_REDUCE) begin
      y_valid = a_valid && b_valid;
      y_last  = a_last;
      for (int l = 0; l < W / PSW; l++)
        y_data[l*PSW +: PSW] = a_data[l*PSW +: PSW] + b_data[l*PSW +: PSW];
      a_ready = y_ready && b_valid;
      b_ready = y_ready && a_valid;
    end else if (!sel_b) begin
      y_valid = a_valid;
      y_data  = a_data;
      y_last  = 1'b0;
      a_ready = y_ready;
    end else begin
      y_valid = b_valid;
      y_data  = b_data;
      y_last  = b_last;
      b_ready = y_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel_b <= 1'b0;
    else if (mode == NODE_CONCAT) begin
      if (!sel_b && a_valid && y_ready && a_last) sel_b <= 1'b1;
      else if (sel_b && b_valid && y_ready && b_last) sel_b <= 1'b0;
    end
  end

  // in REDUCE mode both children must deliver packets of equal length
  assert property (@(posedge clk) disable iff (!rst_n)
                   (mode == NODE_REDUCE && y_valid && y_ready) |-> (a_last == b_last))
    else $error("htree_node: reduced packets differ in length");
endmodule
