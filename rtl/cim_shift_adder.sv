// cim_shift_adder: the bit-serial accumulator behind each MAC array column group.
// Every cycle it takes the 13-bit adder-tree sum, sign-extends it to 32 bits and
// adds it to its register; when 'shift' is set the register is first shifted left
// by one, which moves the accumulated value to the weight of the next (less
// significant) input bit-plane. Activations are streamed most-significant bit
// first and are two's complement, so the sign bit-plane is subtracted ('neg').
// The 32-bit width and the '<<' feedback follow the architecture drawing; the
// MSB-first order and the subtraction are this design's choices.
// Timing: acc updates on the rising edge when en=1; clr restarts from zero.
module cim_shift_adder #(
  parameter int IW = 13,
  parameter int OW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 clr,    // start a new accumulation (acc treated as 0)
  input  logic                 shift,  // shift accumulator left by one before adding
  input  logic                 neg,    // subtract instead of add
  input  logic signed [IW-1:0] in,
  output logic signed [OW-1:0] acc
);
  logic signed [OW-1:0] base, ext;

  always_comb begin
    ext  = OW'(in);                  // sign extension (in is signed)
    base = clr ? '0 : (shift ? (acc <<< 1) : acc);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= neg ? base - ext : base + ext;
  end
endmodule
