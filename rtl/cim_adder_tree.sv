// cim_adder_tree: the adder tree of one MAC array in a CIM crossbar.
// It sums N signed W-bit products (bitwise AND of an input bit with an 8-bit
// weight, one per active row) through log2(N) adder levels. Each level is one
// bit wider than the one below, so with N=32 and W=8 the levels are 9, 10, 11,
// 12 and 13 bits, as in the architecture's adder-tree drawing. The tree is
// purely combinational (no pipeline registers); whether the five levels are
// register-separated is not stated, so this is a design choice.
// Interface: in[N] products, sum = signed sum of all inputs (W+log2(N) bits).
module cim_adder_tree #(
  parameter int N = 32,
  parameter int W = 8
) (
  input  logic signed [W-1:0]              in  [N],
  output logic signed [W+$clog2(N)-1:0]    sum
);
  localparam int L = $clog2(N);

  for (genvar lv = 0; lv <= L; lv++) begin : g_lv
    logic signed [W+lv-1:0] s [N>>lv];
    if (lv == 0) begin : g_leaf
      for (genvar i = 0; i < N; i++) begin : g_i
        assign s[i] = in[i];
      end
    end else begin : g_add
      for (genvar i = 0; i < (N >> lv); i++) begin : g_i
        assign s[i] = g_lv[lv-1].s[2*i] + g_lv[lv-1].s[2*i+1];
      end
    end
  end

  assign sum = g_lv[L].s[0];

  initial begin
    assert (N == (1 << L)) else $error("cim_adder_tree: N must be a power of two");
  end
endmodule
