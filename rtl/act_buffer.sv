// act_buffer: single-port-write, single-port-read activation buffer of DEPTH
// words of W bits (W = 256, the width of the crossbar input and of a core link,
// so one word moves per cycle). A CIM core uses two 2048-word instances as the
// halves of its 128 KB ping-pong input buffer and two 512-word instances as the
// even/odd halves of its 32 KB output buffer.
// Timing: a write takes effect at the clock edge; a read returns rdata one cycle
// after re. Capacities follow the architecture; the port arrangement is this
// design's choice.
module act_buffer #(
  parameter int DEPTH = 2048,
  parameter int W     = 256
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
