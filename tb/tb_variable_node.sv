// tb_variable_node: random messages (Q2.7), LLRs (Q0.7) and penalties
// into variable nodes of degree 3 (multiplier normalisation), 2
// (multiplier) and 4 (shift normalisation), one variable per cycle.  The
// expected x_i is computed in double precision from the update rule
//   t = sum(m) - gamma ; s = t + alpha*sign(t) ; x = clip(s/DV, +-1/2)
// and rounded to Q0.9 and Q0.7; 1 LSB of tolerance.  Cases with t = 0,
// with clipping on both sides and with alpha = 0 are forced and counted.
module tb_variable_node;
  import admm_pkg::*;
  import tb_ref_pkg::*;

  localparam int NV = 500;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic                    iv = 0;
  logic signed [CTV_W-1:0] m [4];
  logic signed [LLR_W-1:0] g;
  logic        [LLR_W-1:0] a;
  logic                    ov3, ov2, ov4;
  logic signed [VTC_W-1:0] x3, x2, x4;
  logic signed [LLR_W-1:0] e3, e2, e4;
  logic signed [CTV_W-1:0] m3 [3], m2 [2];
  assign m3 = '{m[0], m[1], m[2]};
  assign m2 = '{m[0], m[1]};

  variable_node #(.DV(3)) dut3 (.clk, .rst_n, .in_valid(iv), .m_in(m3), .gamma(g), .alpha(a),
                                .out_valid(ov3), .x_out(x3), .xe_out(e3));
  variable_node #(.DV(2)) dut2 (.clk, .rst_n, .in_valid(iv), .m_in(m2), .gamma(g), .alpha(a),
                                .out_valid(ov2), .x_out(x2), .xe_out(e2));
  variable_node #(.DV(4)) dut4 (.clk, .rst_n, .in_valid(iv), .m_in(m), .gamma(g), .alpha(a),
                                .out_valid(ov4), .x_out(x4), .xe_out(e4));

  real ex [3][NV], ee [3][NV];
  int  n4 = 0;
  int  nout = 0, t_in = 0, t_out = -1, n_zero = 0, n_hi = 0, n_lo = 0, n_nopen = 0;

  function automatic real rq(input real a, input real scale);
    real r;
    r = a * scale;
    return (r >= 0.0) ? real'($floor(r + 0.5)) : -real'($floor(-r + 0.5));
  endfunction

  function automatic real vref(input int dv, input int mm [4], input int gg, input int aa);
    real t, s, x;
    t = -real'(gg) / 128.0;
    for (int i = 0; i < dv; i++) t = t + real'(mm[i]) / 128.0;
    if (t > 0.0)      s = t + real'(aa) / 128.0;
    else if (t < 0.0) s = t - real'(aa) / 128.0;
    else              s = t;
    x = clip(s / real'(dv), -0.5, 0.5);
    return x;
  endfunction

  task automatic chk(input int j, input int got, input int gote);
    checks += 2;
    if (rabs(real'(got) - ex[j][nout]) > 1.0) begin
      failures++;
      if (failures < 10) $display("dv-case %0d vec %0d x got %0d exp %f", j, nout, got, ex[j][nout]);
    end
    if (rabs(real'(gote) - ee[j][nout]) > 1.0) failures++;
  endtask

  always @(posedge clk) begin
    if (ov3 && rst_n) begin
      if (t_out < 0) t_out = cyc;
      checks++;
      if (!ov2) failures++;
      chk(0, int'(x3), int'(e3));
      chk(1, int'(x2), int'(e2));
      nout++;
    end
    if (ov4 && rst_n) begin
      checks += 2;
      if (rabs(real'(x4) - ex[2][n4]) > 1.0) begin
        failures++;
        if (failures < 10) $display("dv4 vec %0d x got %0d exp %f", n4, x4, ex[2][n4]);
      end
      if (rabs(real'(e4) - ee[2][n4]) > 1.0) failures++;
      n4++;
    end
  end

  initial begin
    int mm [4];
    int gg, aa;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < NV; n++) begin
      int mode;
      mode = n % 5;
      for (int i = 0; i < 4; i++) mm[i] = (mode == 4) ? rnd_int(511) : rnd_int(120);
      gg = rnd_int(127);
      aa = (n % 3 == 0) ? 0 : 13;
      if (mode == 0) begin              // force t = 0 for DV = 2 and DV = 3
        mm[2] = 0;
        mm[1] = gg - mm[0];
        if (mm[1] > 511 || mm[1] < -512) mm[1] = 0;
        mm[0] = gg - mm[1];
      end
      for (int i = 0; i < 4; i++) m[i] <= CTV_W'(mm[i]);
      g <= LLR_W'(gg);
      a <= LLR_W'(aa);
      ex[0][n] = rq(vref(3, mm, gg, aa), 512.0); ee[0][n] = rq(vref(3, mm, gg, aa), 128.0);
      ex[1][n] = rq(vref(2, mm, gg, aa), 512.0); ee[1][n] = rq(vref(2, mm, gg, aa), 128.0);
      ex[2][n] = rq(vref(4, mm, gg, aa), 512.0); ee[2][n] = rq(vref(4, mm, gg, aa), 128.0);
      if (mm[0] + mm[1] + mm[2] == gg) n_zero++;
      if (ex[0][n] == 256.0) n_hi++;
      if (ex[0][n] == -256.0) n_lo++;
      if (aa == 0) n_nopen++;
      iv <= 1;
      if (n == 0) t_in = cyc;
      @(posedge clk);
    end
    iv <= 0;
    repeat (20) @(posedge clk);
    checks += 3;
    if (nout != NV || n4 != NV) failures++;
    if (t_out - t_in != vn_latency(3) + 1) begin
      failures++; $display("latency %0d expected %0d", t_out - t_in - 1, vn_latency(3));
    end
    if (n_zero == 0 || n_hi == 0 || n_lo == 0 || n_nopen == 0) begin
      failures++; $display("coverage zero %0d hi %0d lo %0d nopen %0d", n_zero, n_hi, n_lo, n_nopen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
