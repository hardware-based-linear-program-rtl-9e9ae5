// pp_projection: Euclidean projection of v (Q3.9) onto the centred parity
// polytope PP_d - 1/2, result w in Q0.12.
//
// 1. facet_id finds the odd-weight cube vertex f closest to v.
// 2. Similarity transform: vt_i = -v_i where f_i = 1, else v_i (Q4.9);
//    this maps the cut of vertex f onto the centred probability simplex.
//    In the same stage v is clipped to [-1/2, 1/2] (hypercube projection,
//    kept in Q0.12) and vt is clipped as well.
// 3. Membership test: a pipelined adder tree sums the clipped vt; the sum
//    is compared with 1 - d/2.  If it is at least that, the clipped v is
//    already in the polytope and is the answer.
// 4. simplex_projection projects vt; the transform is applied again to
//    its output (it is its own inverse) and the result is rounded from
//    Q0.13 to Q0.12.
// 5. The stored membership bit selects the clipped v or the transformed
//    simplex output.
// As in the described implementation, the membership test and the
// simplex projection run one after the other rather than side by side;
// f, the clipped v and the membership bit wait in delay lines.
// Latency LAT = (ceil(log2 d)+1) + 1 + ceil(log2 d) + 1 + LAT_simplex + 1,
// one vector per cycle.  Debug outputs report which branch was taken.
module pp_projection #(
  parameter int D = 6
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  input  logic signed [admm_pkg::V_W-1:0] vin  [D],   // Q3.9
  output logic                            out_valid,
  output logic signed [admm_pkg::Z_W-1:0] wout [D],   // Q0.12
  output logic                            out_inside, // clipped v was kept
  output logic                            out_flipped // facet id flipped a bit
);
  import admm_pkg::*;

  localparam int L    = log2_exact(D);
  localparam int LF   = L + 1;
  localparam int LA   = L;
  localparam int LS   = L * (L + 1) / 2 + L + 4;   // simplex latency
  localparam int LAT  = LF + 1 + LA + 1 + LS + 1;
  localparam int CW   = 11;                        // clipped value, Q1.9
  localparam int AW   = CW + L;
  localparam int HALF9 = 1 << 8;                   // 1/2 in Q.9

  // ------------------------------------------------------ facet identify
  logic [D-1:0] f;
  logic         flipped;
  facet_id #(.D(D)) u_fid (.clk, .rst_n, .v(vin), .f, .flipped);

  logic [D*V_W-1:0] v_pk, v_pk_d;
  logic signed [V_W-1:0] v_f [D];
  for (genvar i = 0; i < D; i++) begin : g_vpk
    assign v_pk[i*V_W +: V_W] = vin[i];
    assign v_f[i] = v_pk_d[i*V_W +: V_W];
  end
  delay_line #(.W(D*V_W), .N(LF)) u_vdl (.clk, .rst_n, .d(v_pk), .q(v_pk_d));

  // ------------------------------- transform and hypercube projections
  logic signed [VT_W-1:0] vt  [D];
  logic signed [CW-1:0]   cvt [D];   // clip(vt), Q.9
  logic signed [Z_W-1:0]  cv  [D];   // clip(v),  Q0.12
  logic [D-1:0]           f_t;
  logic                   flip_t;
  for (genvar i = 0; i < D; i++) begin : g_tr
    logic signed [VT_W-1:0] t;
    assign t = f[i] ? -VT_W'(v_f[i]) : VT_W'(v_f[i]);
    always_ff @(posedge clk) begin
      vt[i] <= t;
      if (t > VT_W'(HALF9))        cvt[i] <= CW'(HALF9);
      else if (t < -VT_W'(HALF9))  cvt[i] <= -CW'(HALF9);
      else                         cvt[i] <= CW'(t);
      if (v_f[i] > V_W'(HALF9))        cv[i] <= Z_W'(HALF9 << 3);
      else if (v_f[i] < -V_W'(HALF9))  cv[i] <= -Z_W'(HALF9 << 3);
      else                             cv[i] <= Z_W'(v_f[i]) <<< 3;
    end
  end
  always_ff @(posedge clk) begin
    f_t    <= f;
    flip_t <= flipped;
  end

  // ------------------------------------------------------ membership test
  logic signed [AW-1:0] csum;
  adder_tree #(.N(D), .IW(CW), .OW(AW)) u_sum (.clk, .din(cvt), .sum(csum));
  localparam int THR = (1 << 9) - D * HALF9;       // 1 - d/2 in Q.9
  logic isin;
  always_ff @(posedge clk) isin <= (csum >= AW'(THR));

  // vt waits for the membership decision, then enters the simplex
  logic [D*VT_W-1:0] vt_pk, vt_pk_d;
  logic signed [VT_W-1:0] vt_s [D];
  for (genvar i = 0; i < D; i++) begin : g_vtpk
    assign vt_pk[i*VT_W +: VT_W] = vt[i];
    assign vt_s[i] = vt_pk_d[i*VT_W +: VT_W];
  end
  delay_line #(.W(D*VT_W), .N(LA + 1)) u_vtdl (.clk, .rst_n, .d(vt_pk), .q(vt_pk_d));

  logic vld_s;
  delay_line #(.W(1), .N(LF + 1 + LA + 1)) u_vld0 (.clk, .rst_n, .d(in_valid), .q(vld_s));

  // ------------------------------------------------- simplex projection
  logic signed [SP_W-1:0] ut [D];
  logic                   sp_valid;
  simplex_projection #(.D(D)) u_sp (.clk, .rst_n, .in_valid(vld_s), .vin(vt_s),
                                    .out_valid(sp_valid), .wout(ut));

  // f, clip(v) and the flip flag wait LA+1+LS after the transform stage,
  // the membership bit LS after its own register.
  logic [D*Z_W+D:0] keep_pk, keep_pk_d;
  for (genvar i = 0; i < D; i++) begin : g_kpk
    assign keep_pk[i*Z_W +: Z_W] = cv[i];
  end
  assign keep_pk[D*Z_W +: D] = f_t;
  assign keep_pk[D*Z_W + D]  = flip_t;
  delay_line #(.W(D*Z_W+D+1), .N(LA + 1 + LS)) u_kdl (.clk, .rst_n, .d(keep_pk), .q(keep_pk_d));

  logic isin_d;
  delay_line #(.W(1), .N(LS)) u_idl (.clk, .rst_n, .d(isin), .q(isin_d));

  // ------------------------------------ inverse transform and selection
  for (genvar i = 0; i < D; i++) begin : g_out
    logic signed [Z_W-1:0]  r;
    logic signed [Z_W-1:0]  cv_d;
    logic                   f_d;
    assign cv_d = keep_pk_d[i*Z_W +: Z_W];
    assign f_d  = keep_pk_d[D*Z_W + i];
    assign r    = Z_W'(sat(rnd_shr(longint'(ut[i]), 1), Z_W));
    always_ff @(posedge clk) begin
      if (isin_d)  wout[i] <= cv_d;
      else if (f_d)  wout[i] <= -r;
      else           wout[i] <= r;
    end
  end
  always_ff @(posedge clk) begin
    out_inside  <= isin_d;
    out_flipped <= keep_pk_d[D*Z_W + D];
  end

  delay_line #(.W(1), .N(1)) u_vld1 (.clk, .rst_n, .d(sp_valid), .q(out_valid));
endmodule
