// tb_sfu: full-size SFU (64 lanes, 10 KB buffer). Runs PASS, ADD and MUL
// streams; a softmax over 4 vectors (EXP_ACC then NORM) whose outputs must match
// a reference model of the fixed-point exp and reciprocal, stay within 7% of the
// real exponential, and sum to 1.0 within rounding; and a sum of squares
// followed by SQRT. It also checks the time of the NORM command (49 reciprocal
// cycles before the first output).
module tb_sfu;
  import ouro_pkg::*;
  localparam int LN = 64;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, acc_clr, in_valid, in_last, in_ready, out_valid, out_last, out_ready, done;
  sfu_op_e cmd_op;
  logic signed [31:0] cmd_scalar, scalar_out;
  logic signed [31:0] in_data [LN], out_data [LN];
  logic signed [47:0] acc;
  int checks = 0, failures = 0;
  logic signed [31:0] vec [4][LN];

  sfu #(.LANES(LN), .BUF_BYTES(10240)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic longint ref_exp(input longint x);
    longint y, n, m;
    y = (x * 94548) >>> 16;
    n = y >>> 16;
    m = 65536 + (y & 65535);
    if (n >= 15) return 32'h7fffffff;
    if (n < -17) return 0;
    return (n >= 0) ? ((m << n) & 32'hffffffff) : (m >> (-n));
  endfunction

  task automatic cmd(input sfu_op_e op, input int s);
    @(negedge clk); cmd_valid = 1; cmd_op = op; cmd_scalar = s;
    @(posedge clk); #1 cmd_valid = 0;
  endtask

  // stream nv vectors in; if the op produces output, compare with expect()
  task automatic stream(input int nv, input sfu_op_e op, input int s);
    int sent = 0;
    cmd(op, s);
    while (sent < nv) begin
      @(negedge clk);
      in_valid = 1; in_last = (sent == nv - 1);
      for (int i = 0; i < LN; i++) in_data[i] = vec[sent][i];
      @(posedge clk);
      if (in_ready) begin
        if (out_valid)
          for (int i = 0; i < LN; i++) begin
            longint e = (op == SFU_ADD) ? longint'(vec[sent][i]) + s :
                        (op == SFU_MUL) ? (longint'(vec[sent][i]) * s) >>> 16 : longint'(vec[sent][i]);
            chk(out_data[i] == 32'(e), $sformatf("op %0d v %0d lane %0d", op, sent, i));
          end
        sent++;
      end
    end
    #1 in_valid = 0;
    @(posedge clk);
  endtask

  initial begin
    longint sum, recip, tot, sq;
    int t0, n;
    cmd_valid = 0; cmd_op = SFU_PASS; cmd_scalar = 0; acc_clr = 0; in_valid = 0; in_last = 0;
    out_ready = 1;
    for (int i = 0; i < LN; i++) in_data[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int v = 0; v < 4; v++) for (int i = 0; i < LN; i++) vec[v][i] = $urandom;
    stream(3, SFU_PASS, 0);
    stream(3, SFU_ADD, 32'h0003_8000);
    for (int v = 0; v < 4; v++) for (int i = 0; i < LN; i++) vec[v][i] = 32'($urandom % 32'h0010_0000) - 32'sh0008_0000;
    stream(3, SFU_MUL, 32'hffff_4000);
    // softmax over 256 values in [-4, 0)
    @(negedge clk); acc_clr = 1; @(posedge clk); #1 acc_clr = 0;
    for (int v = 0; v < 4; v++) for (int i = 0; i < LN; i++) vec[v][i] = -32'($urandom % 32'h0004_0000);
    stream(4, SFU_EXP_ACC, 0);
    sum = 0;
    for (int v = 0; v < 4; v++) for (int i = 0; i < LN; i++) sum += ref_exp(vec[v][i]);
    chk(acc == 48'(sum), $sformatf("exp sum %0d vs %0d", acc, sum));
    for (int v = 0; v < 4; v++) for (int i = 0; i < LN; i++) begin
      real r, d;
      r = $exp(real'(vec[v][i]) / 65536.0) * 65536.0;
      d = real'(ref_exp(vec[v][i])) - r;
      if (d < 0) d = -d;
      chk(d <= 0.07 * r + 2.0, "exp approximation within 7%");
    end
    recip = (64'd1 << 48) / sum;
    cmd(SFU_NORM, 0); t0 = $time;
    n = 0; tot = 0;
    while (n < 4) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        if (n == 0) chk(($time - t0) / 10 == 49, $sformatf("reciprocal time %0d", ($time - t0) / 10));
        for (int i = 0; i < LN; i++) begin
          longint e;
          e = longint'((128'(ref_exp(vec[n][i])) * 128'(recip)) >>> 32);
          chk(out_data[i] == 32'(e), $sformatf("norm v %0d lane %0d", n, i));
          tot += out_data[i];
        end
        chk(out_last == (n == 3), "norm last");
        n++;
      end
    end
    chk(tot > 65536 - 300 && tot <= 65536, $sformatf("softmax sums to %0d/65536", tot));
    // sum of squares and square root
    @(posedge clk); #1;
    @(negedge clk); acc_clr = 1; @(posedge clk); #1 acc_clr = 0;
    for (int v = 0; v < 2; v++) for (int i = 0; i < LN; i++) vec[v][i] = 32'($urandom % 32'h0002_0000) - 32'sh0001_0000;
    stream(2, SFU_SQACC, 0);
    sq = 0;
    for (int v = 0; v < 2; v++) for (int i = 0; i < LN; i++) sq += (longint'(vec[v][i]) * vec[v][i]) >>> 16;
    chk(acc == 48'(sq), "sum of squares");
    cmd(SFU_SQRT, 0);
    while (!done) @(posedge clk);
    #1 begin
      longint rs;
      rs = longint'($floor($sqrt(real'(sq) * 65536.0)));
      while ((rs + 1) * (rs + 1) <= sq * 65536) rs++;
      while (rs * rs > sq * 65536) rs--;
      chk(longint'(scalar_out) == rs, $sformatf("sqrt got %0d exp %0d", scalar_out, rs));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
