// tb_check_node: random check-node inputs (x in Q0.9 within [-1/2,1/2],
// lambda in Q2.7) for D = 6, one check per cycle.  The expected outputs
// are computed in double precision: v = x + lambda, z = polytope
// projection of v, lambda' = v - z, m = 2z - v, each rounded to Q2.7 and
// saturated to [-4, 4 - 1/128].  A 1-LSB tolerance covers rounding of z.
// Some checks use large lambda so that saturation happens; its count and
// the pipeline latency are checked.
module tb_check_node;
  import admm_pkg::*;
  import tb_ref_pkg::*;

  localparam int D  = 6;
  localparam int NV = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic                    iv = 0, ov, sat_ev, pin, pfl;
  logic signed [VTC_W-1:0] x [D];
  logic signed [CTV_W-1:0] lam [D], lo [D], mo [D];
  check_node #(.D(D)) dut (.clk, .rst_n, .in_valid(iv), .x_in(x), .lam_in(lam),
                           .out_valid(ov), .lam_out(lo), .m_out(mo),
                           .sat_event(sat_ev), .pp_inside(pin), .pp_flipped(pfl));

  real el [NV][D], em [NV][D];
  int  nout = 0, t_in = 0, t_out = -1, nsat = 0;

  function automatic real q27(input real a);
    real r;
    r = a * 128.0;
    r = (r >= 0.0) ? real'($floor(r + 0.5)) : -real'($floor(-r + 0.5));
    if (r > 511.0) r = 511.0;
    if (r < -512.0) r = -512.0;
    return r;
  endfunction

  always @(posedge clk) begin
    if (ov && rst_n) begin
      if (t_out < 0) t_out = cyc;
      if (sat_ev) nsat++;
      for (int i = 0; i < D; i++) begin
        checks += 2;
        if (rabs(real'(lo[i]) - el[nout][i]) > 1.0) begin
          failures++;
          if (failures < 10) $display("vec %0d lam[%0d] got %0d exp %f", nout, i, lo[i], el[nout][i]);
        end
        if (rabs(real'(mo[i]) - em[nout][i]) > 1.0) begin
          failures++;
          if (failures < 10) $display("vec %0d m[%0d] got %0d exp %f", nout, i, mo[i], em[nout][i]);
        end
      end
      nout++;
    end
  end

  initial begin
    real v [DMAX], z [DMAX];
    bit  ins, fl;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < NV; n++) begin
      int big;
      big = (n % 10 == 9);
      for (int i = 0; i < D; i++) begin
        int xk, lk;
        xk = rnd_int(256);
        lk = big ? rnd_int(511) : rnd_int(100);
        if (n % 20 == 19) begin       // odd number of large positives
          xk = (i == 0) ? -256 : 256;
          lk = (i == 0) ? -512 : 511 - int'($urandom_range(20, 0));
        end
        x[i]   <= VTC_W'(xk);
        lam[i] <= CTV_W'(lk);
        v[i] = real'(xk) / 512.0 + real'(lk) / 128.0;
      end
      pp_ref(D, v, z, ins, fl);
      for (int i = 0; i < D; i++) begin
        el[n][i] = q27(v[i] - z[i]);
        em[n][i] = q27(2.0 * z[i] - v[i]);
      end
      iv <= 1;
      if (n == 0) t_in = cyc;
      @(posedge clk);
    end
    iv <= 0;
    repeat (60) @(posedge clk);
    checks += 3;
    if (nout != NV) failures++;
    if (t_out - t_in != cn_latency(D) + 1) begin
      failures++; $display("latency %0d expected %0d", t_out - t_in - 1, cn_latency(D));
    end
    if (nsat == 0) begin failures++; $display("saturation never happened"); end
    $display("saturated %0d", nsat);
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
