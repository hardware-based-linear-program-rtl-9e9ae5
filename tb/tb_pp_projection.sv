// tb_pp_projection: random Q3.9 vectors, one per cycle, into
// pp_projection for D = 6 (the ensemble code's check degree) and D = 16
// (the largest WiGig check).  Every output is compared with a
// double-precision implementation of facet identification, similarity
// transform, simplex projection and membership test (2 LSB of Q0.12
// tolerance); the membership and parity-flip flags must match exactly.
// Inputs mix points inside the polytope, points near the cube and far
// points, so both branches of the membership test and both parities are
// exercised; their counts are checked.  The pipeline latency is checked.
module tb_pp_projection;
  import admm_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  localparam int NV = 400;

  logic                  iv = 0, ov6, ov16, in6, in16, fl6, fl16;
  logic signed [V_W-1:0] vi6 [6], vi16 [16];
  logic signed [Z_W-1:0] wo6 [6], wo16 [16];
  pp_projection #(.D(6))  dut6  (.clk, .rst_n, .in_valid(iv), .vin(vi6),  .out_valid(ov6),
                                 .wout(wo6), .out_inside(in6), .out_flipped(fl6));
  pp_projection #(.D(16)) dut16 (.clk, .rst_n, .in_valid(iv), .vin(vi16), .out_valid(ov16),
                                 .wout(wo16), .out_inside(in16), .out_flipped(fl16));

  real e6 [NV][DMAX], e16 [NV][DMAX];
  bit  ei6 [NV], ei16 [NV], ef6 [NV], ef16 [NV];
  int  n6 = 0, n16 = 0, t_in = 0, t_out = -1, n_inside = 0, n_outside = 0, n_flip = 0;

  task automatic gen(input int d, output logic signed [V_W-1:0] q [DMAX], output real e [DMAX],
                     output bit ins, output bit fl);
    real vr [DMAX];
    int  mode;
    mode = int'($urandom_range(3, 0));
    for (int i = 0; i < d; i++) begin
      int k;
      case (mode)
        0: k = rnd_int(100);            // close to the centre: inside
        1: k = rnd_int(400);            // around the cube
        2: k = rnd_int(2300);           // far, up to +-4.5
        default: k = (i == 0) ? rnd_int(50) : 256 + rnd_int(200);
      endcase
      q[i]  = V_W'(k);
      vr[i] = real'(k) / 512.0;
    end
    pp_ref(d, vr, e, ins, fl);
  endtask

  task automatic cmp(input int d, input int n, input logic signed [Z_W-1:0] w [DMAX],
                     input real e [DMAX], input bit gi, input bit ei, input bit gf, input bit ef);
    for (int i = 0; i < d; i++) begin
      real got;
      got = real'(w[i]) / 4096.0;
      checks++;
      if (rabs(got - e[i]) > 2.0 / 4096.0) begin
        failures++;
        if (failures < 10) $display("D%0d vec %0d comp %0d got %f exp %f", d, n, i, got, e[i]);
      end
    end
    checks += 2;
    if (gi != ei) begin failures++; if (failures < 10) $display("D%0d vec %0d inside %0d exp %0d", d, n, gi, ei); end
    if (gf != ef) failures++;
  endtask

  always @(posedge clk) begin
    if (ov6 && rst_n) begin
      logic signed [Z_W-1:0] w [DMAX];
      if (t_out < 0) t_out = cyc;
      for (int i = 0; i < 6; i++) w[i] = wo6[i];
      cmp(6, n6, w, e6[n6], in6, ei6[n6], fl6, ef6[n6]);
      if (in6) n_inside++; else n_outside++;
      if (fl6) n_flip++;
      n6++;
    end
    if (ov16 && rst_n) begin
      logic signed [Z_W-1:0] w [DMAX];
      for (int i = 0; i < 16; i++) w[i] = wo16[i];
      cmp(16, n16, w, e16[n16], in16, ei16[n16], fl16, ef16[n16]);
      n16++;
    end
  end

  initial begin
    logic signed [V_W-1:0] q [DMAX];
    real e [DMAX];
    bit ins, fl;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < NV; n++) begin
      gen(6, q, e, ins, fl);
      for (int i = 0; i < 6; i++) begin vi6[i] <= q[i]; e6[n][i] = e[i]; end
      ei6[n] = ins; ef6[n] = fl;
      gen(16, q, e, ins, fl);
      for (int i = 0; i < 16; i++) begin vi16[i] <= q[i]; e16[n][i] = e[i]; end
      ei16[n] = ins; ef16[n] = fl;
      iv <= 1;
      if (n == 0) t_in = cyc;
      @(posedge clk);
    end
    iv <= 0;
    repeat (60) @(posedge clk);
    checks += 4;
    if (n6 != NV || n16 != NV) begin failures++; $display("count %0d %0d", n6, n16); end
    if (t_out - t_in != pp_latency(6) + 1) begin
      failures++; $display("latency %0d expected %0d", t_out - t_in - 1, pp_latency(6));
    end
    if (n_inside == 0 || n_outside == 0) begin failures++; $display("membership branch not covered"); end
    if (n_flip == 0 || n_flip == NV) begin failures++; $display("parity flip not covered"); end
    $display("inside %0d outside %0d flipped %0d", n_inside, n_outside, n_flip);
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
