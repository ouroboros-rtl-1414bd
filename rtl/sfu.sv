// sfu: special function unit of a CIM core (softmax and normalisation support).
// An ElementWise unit with LANES lanes (exp, multiply, add, divide) and a
// Reduction unit (add tree, square root, divide) share a buffer of BUF_BYTES.
// Data are signed 32-bit fixed point with 16 fraction bits (Q16.16).
// A command (op, scalar) is accepted on cmd_valid when idle:
//   PASS/ADD/MUL : stream in -> stream out, one LANES vector per cycle,
//                  y = x, x + scalar, (x * scalar) >> 16; ends with in_last.
//   EXP_ACC      : stream in, y = exp(x) written to the buffer and summed by the
//                  add tree into the accumulator (first pass of softmax).
//   NORM         : computes 2^48/accumulator (a reciprocal with 32 fraction
//                  bits) with a restoring divider (49 cycles),
//                  then streams out every buffered vector times the reciprocal
//                  (second pass of softmax: element-wise division).
//   SQACC        : stream in, accumulator += sum(x*x) >> 16 (for RMS/layer norm).
//   SQRT         : scalar_out = sqrt(accumulator), 32 cycles, digit by digit.
// exp(x) is computed as 2^(x*log2 e) with the fraction approximated linearly,
// 2^f ~ 1+f; results saturate at 0x7fffffff and flush to 0 below 2^-17.
// 'done' pulses when a command completes; acc_clr clears the accumulator.
// Lane count and buffer size follow the architecture; the number format, the
// operation set's encoding, the exp approximation and the shared-reciprocal
// division are this design's choices.
module sfu
  import ouro_pkg::*;
#(
  parameter int LANES     = 64,
  parameter int BUF_BYTES = 10240
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cmd_valid,
  input  sfu_op_e                   cmd_op,
  input  logic signed [31:0]        cmd_scalar,
  output logic                      cmd_ready,
  input  logic                      acc_clr,
  input  logic                      in_valid,
  input  logic signed [31:0]        in_data [LANES],
  input  logic                      in_last,
  output logic                      in_ready,
  output logic                      out_valid,
  output logic signed [31:0]        out_data [LANES],
  output logic                      out_last,
  input  logic                      out_ready,
  output logic signed [47:0]        acc,
  output logic signed [31:0]        scalar_out,
  output logic                      done
);
  localparam int NENT = BUF_BYTES / (LANES * 4);
  localparam int AW   = $clog2(NENT);
  localparam logic signed [31:0] LOG2E = 32'sd94548;  // log2(e) in Q16.16

  typedef enum logic [2:0] {S_IDLE, S_STREAM, S_DIV, S_NORM, S_SQRT} state_e;
  state_e  st;
  sfu_op_e op;
  logic signed [31:0] scal;

  logic [LANES*32-1:0] buffer [NENT];
  logic [AW-1:0]       wptr, rptr;

  // ---------------- element-wise unit ----------------
  function automatic logic signed [31:0] fx_exp(input logic signed [31:0] x);
    logic signed [63:0] y;
    logic signed [31:0] n;
    logic        [31:0] mant;
    y    = (64'(x) * 64'(LOG2E)) >>> 16;
    n    = 32'(y >>> 16);
    mant = 32'h0001_0000 + {16'h0, y[15:0]};
    if (n >= 15)       return 32'sh7fff_ffff;
    else if (n < -17)  return 32'sd0;
    else if (n >= 0)   return signed'(mant << n);
    else               return signed'(mant >> (-n));
  endfunction

  logic signed [31:0] ew [LANES];
  logic signed [47:0] red;        // reduction add tree result
  logic signed [31:0] bufv [LANES];

  always_comb begin
    red = '0;
    for (int i = 0; i < LANES; i++) begin
      bufv[i] = buffer[rptr][i*32 +: 32];
      unique case (op)
        SFU_ADD:     ew[i] = in_data[i] + scal;
        SFU_MUL:     ew[i] = 32'((64'(in_data[i]) * 64'(scal)) >>> 16);
        SFU_EXP_ACC: ew[i] = fx_exp(in_data[i]);
        SFU_SQACC:   ew[i] = 32'((64'(in_data[i]) * 64'(in_data[i])) >>> 16);
        default:     ew[i] = in_data[i];
      endcase
      red = red + 48'(ew[i]);
    end
  end

  // ---------------- reduction unit: reciprocal and square root ----------------
  logic [5:0]  it;
  logic [48:0] rem;
  logic [48:0] quo;
  logic [63:0] rad;
  logic [33:0] sroot;
  logic [65:0] srem;

  logic [48:0] rem_sh;
  logic [65:0] srem_sh, strial;
  always_comb begin
    rem_sh  = {rem[47:0], (it == 6'd48)};           // dividend is 2^48
    srem_sh = {srem[63:0], rad[63:62]};
    strial  = {30'd0, sroot, 2'b01};
  end

  // stream handshakes
  always_comb begin
    cmd_ready = (st == S_IDLE);
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_last  = 1'b0;
    for (int i = 0; i < LANES; i++) out_data[i] = ew[i];
    if (st == S_STREAM) begin
      if (op == SFU_EXP_ACC || op == SFU_SQACC) in_ready = 1'b1;
      else begin
        in_ready  = out_ready;
        out_valid = in_valid;
        out_last  = in_last;
      end
    end else if (st == S_NORM) begin
      out_valid = 1'b1;
      out_last  = (rptr == wptr - 1'b1);
      for (int i = 0; i < LANES; i++)
        out_data[i] = 32'((96'(bufv[i]) * $signed({47'd0, quo})) >>> 32);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; op <= SFU_PASS; scal <= '0;
      wptr <= '0; rptr <= '0; acc <= '0; scalar_out <= '0; done <= 1'b0;
      it <= '0; rem <= '0; quo <= '0; rad <= '0; sroot <= '0; srem <= '0;
    end else begin
      done <= 1'b0;
      if (acc_clr) begin
        acc  <= '0;
        wptr <= '0;
      end
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          op   <= cmd_op;
          scal <= cmd_scalar;
          unique case (cmd_op)
            SFU_NORM: begin st <= S_DIV; it <= 6'd48; rem <= '0; quo <= '0; end
            SFU_SQRT: begin
              st <= S_SQRT; it <= 6'd31; srem <= '0; sroot <= '0;
              rad <= 64'(acc) << 16;
            end
            default:  st <= S_STREAM;
          endcase
        end
        S_STREAM: if (in_valid && in_ready) begin
          if (op == SFU_EXP_ACC) begin
            for (int i = 0; i < LANES; i++) buffer[wptr][i*32 +: 32] <= ew[i];
            wptr <= wptr + 1'b1;
            acc  <= acc + red;
          end else if (op == SFU_SQACC) begin
            acc  <= acc + red;
          end
          if (in_last) begin st <= S_IDLE; done <= 1'b1; end
        end
        S_DIV: begin   // restoring division 2^48 / acc, one quotient bit per cycle
          if (rem_sh >= 49'(acc)) begin
            rem <= rem_sh - 49'(acc);
            quo <= {quo[47:0], 1'b1};
          end else begin
            rem <= rem_sh;
            quo <= {quo[47:0], 1'b0};
          end
          if (it == 6'd0) begin st <= S_NORM; rptr <= '0; end
          else it <= it - 1'b1;
        end
        S_NORM: if (out_ready) begin
          rptr <= rptr + 1'b1;
          if (rptr == wptr - 1'b1) begin st <= S_IDLE; done <= 1'b1; end
        end
        S_SQRT: begin  // digit-by-digit integer square root of acc<<16
          rad <= rad << 2;
          if (srem_sh >= strial) begin
            srem  <= srem_sh - strial;
            sroot <= {sroot[32:0], 1'b1};
          end else begin
            srem  <= srem_sh;
            sroot <= {sroot[32:0], 1'b0};
          end
          if (it == 6'd0) begin
            st <= S_IDLE; done <= 1'b1;
            scalar_out <= 32'({sroot[32:0], (srem_sh >= strial)});
          end else it <= it - 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (st == S_DIV) |-> (acc > 0))
    else $error("sfu: normalising by a non-positive sum");
endmodule
