// tb_simplex_projection: drives random Q4.9 vectors (one per cycle, back
// to back) into simplex_projection for D = 6 and D = 5 and compares every
// output with a double-precision shift-and-clip projection, allowing 2
// LSBs of Q0.13.  Also checks the pipeline latency and that every output
// vector lies on the simplex (sum of w + 1/2 equals 1 within rounding).
module tb_simplex_projection;
  import admm_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  localparam int NV = 400;

  // ---- two instances, D = 6 (multiplier path for i = 3, 5, 6) and D = 5
  logic                   iv6 = 0, ov6, iv5 = 0, ov5;
  logic signed [VT_W-1:0] vi6 [6], vi5 [5];
  logic signed [SP_W-1:0] wo6 [6], wo5 [5];
  simplex_projection #(.D(6)) dut6 (.clk, .rst_n, .in_valid(iv6), .vin(vi6), .out_valid(ov6), .wout(wo6));
  simplex_projection #(.D(5)) dut5 (.clk, .rst_n, .in_valid(iv5), .vin(vi5), .out_valid(ov5), .wout(wo5));

  real exp6 [NV][DMAX], exp5 [NV][DMAX];
  int  nout6 = 0, nout5 = 0, t_in = 0, t_out = -1, cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic gen(input int d, output logic signed [VT_W-1:0] q [DMAX], output real e [DMAX]);
    real vr [DMAX];
    int  mode;
    mode = int'($urandom_range(2, 0));
    for (int i = 0; i < d; i++) begin
      int k;
      case (mode)
        0: k = rnd_int(512);            // [-1, 1]
        1: k = rnd_int(4000);           // wide
        default: k = rnd_int(300) - 256;// mostly negative
      endcase
      q[i]  = VT_W'(k);
      vr[i] = real'(k) / 512.0;
    end
    simplex_ref(d, vr, e);
  endtask

  always @(posedge clk) begin
    if (ov6 && rst_n) begin
      real sum;
      sum = 0.0;
      if (t_out < 0) t_out = cyc;
      for (int i = 0; i < 6; i++) begin
        real got;
        got = real'(wo6[i]) / 8192.0;
        sum = sum + got + 0.5;
        checks++;
        if (rabs(got - exp6[nout6][i]) > 2.0 / 8192.0) begin
          failures++;
          if (failures < 10) $display("D6 vec %0d comp %0d got %f exp %f", nout6, i, got, exp6[nout6][i]);
        end
      end
      checks++;
      if (rabs(sum - 1.0) > 8.0 / 8192.0) failures++;
      nout6++;
    end
    if (ov5 && rst_n) begin
      for (int i = 0; i < 5; i++) begin
        real got;
        got = real'(wo5[i]) / 8192.0;
        checks++;
        if (rabs(got - exp5[nout5][i]) > 2.0 / 8192.0) begin
          failures++;
          if (failures < 10) $display("D5 vec %0d comp %0d got %f exp %f", nout5, i, got, exp5[nout5][i]);
        end
      end
      nout5++;
    end
  end

  initial begin
    logic signed [VT_W-1:0] q [DMAX];
    real e [DMAX];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < NV; n++) begin
      gen(6, q, e);
      for (int i = 0; i < 6; i++) begin vi6[i] <= q[i]; exp6[n][i] = e[i]; end
      gen(5, q, e);
      for (int i = 0; i < 5; i++) begin vi5[i] <= q[i]; exp5[n][i] = e[i]; end
      iv6 <= 1; iv5 <= 1;
      if (n == 0) t_in = cyc;
      @(posedge clk);
    end
    iv6 <= 0; iv5 <= 0;
    repeat (40) @(posedge clk);
    checks++;
    if (nout6 != NV || nout5 != NV) begin failures++; $display("count %0d %0d", nout6, nout5); end
    checks++;
    if (t_out - t_in != simplex_latency(6) + 1) begin
      failures++; $display("latency %0d expected %0d", t_out - t_in - 1, simplex_latency(6));
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
