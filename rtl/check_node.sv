// check_node: ADMM-LP check update for one check of degree D.
//
//   v_j      = x_Nc(j) + lambda_j          (lambda zero-extended to 9
//                                           fraction bits, Q3.9 result)
//   z_j      = projection of v_j onto the centred parity polytope (Q0.12)
//   lambda_j' = v_j - z_j                  (v extended to 12 fraction bits)
//   m_j->Nc(j) = 2 z_j - v_j               (2z by reinterpreting z with one
//                                           fraction bit fewer, v extended
//                                           to 11 fraction bits)
// The new check state and outgoing messages are rounded to 7 fraction
// bits (ties away from zero) and saturated to Q2.7.  v_j waits in a delay
// line while the projection runs.  Inputs x in Q0.9, lambda in Q2.7.
// Latency LAT = 1 + LAT_pp + 1 cycles, one check per cycle, no stalls.
// sat_event pulses with out_valid when any output was saturated.
module check_node #(
  parameter int D = 6
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic signed [admm_pkg::VTC_W-1:0] x_in   [D],  // Q0.9
  input  logic signed [admm_pkg::CTV_W-1:0] lam_in [D],  // Q2.7
  output logic                              out_valid,
  output logic signed [admm_pkg::CTV_W-1:0] lam_out [D], // Q2.7
  output logic signed [admm_pkg::CTV_W-1:0] m_out   [D], // Q2.7
  output logic                              sat_event,
  output logic                              pp_inside,
  output logic                              pp_flipped
);
  import admm_pkg::*;

  localparam int L    = log2_exact(D);
  localparam int LPP  = (L + 1) + 1 + L + 1 + (L * (L + 1) / 2 + L + 4) + 1;

  // ---------------------------------------------------------- v = x + lam
  logic signed [V_W-1:0] v [D];
  logic                  v_valid;
  for (genvar i = 0; i < D; i++) begin : g_add
    always_ff @(posedge clk) v[i] <= V_W'(x_in[i]) + (V_W'(lam_in[i]) <<< 2);
  end
  always_ff @(posedge clk) begin
    if (!rst_n) v_valid <= 1'b0;
    else        v_valid <= in_valid;
  end

  // ----------------------------------------------------------- projection
  logic signed [Z_W-1:0] z [D];
  logic                  z_valid, z_in, z_fl;
  pp_projection #(.D(D)) u_pp (.clk, .rst_n, .in_valid(v_valid), .vin(v),
                               .out_valid(z_valid), .wout(z),
                               .out_inside(z_in), .out_flipped(z_fl));

  logic [D*V_W-1:0] v_pk, v_pk_d;
  logic signed [V_W-1:0] v_d [D];
  for (genvar i = 0; i < D; i++) begin : g_vpk
    assign v_pk[i*V_W +: V_W] = v[i];
    assign v_d[i] = v_pk_d[i*V_W +: V_W];
  end
  delay_line #(.W(D*V_W), .N(LPP)) u_vdl (.clk, .rst_n, .d(v_pk), .q(v_pk_d));

  // ---------------------------------------------- state and message update
  logic [D-1:0] sat_l, sat_m;
  for (genvar i = 0; i < D; i++) begin : g_upd
    longint dl, dm, rl, rm;
    always_comb begin
      dl = (longint'(v_d[i]) <<< 3) - longint'(z[i]);   // 12 fraction bits
      dm = longint'(z[i]) - (longint'(v_d[i]) <<< 2);   // 11 fraction bits
      rl = rnd_shr(dl, 5);
      rm = rnd_shr(dm, 4);
    end
    assign sat_l[i] = (rl != sat(rl, CTV_W));
    assign sat_m[i] = (rm != sat(rm, CTV_W));
    always_ff @(posedge clk) begin
      lam_out[i] <= CTV_W'(sat(rl, CTV_W));
      m_out[i]   <= CTV_W'(sat(rm, CTV_W));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      sat_event  <= 1'b0;
      pp_inside  <= 1'b0;
      pp_flipped <= 1'b0;
    end else begin
      out_valid  <= z_valid;
      sat_event  <= z_valid & ((|sat_l) | (|sat_m));
      pp_inside  <= z_valid & z_in;
      pp_flipped <= z_valid & z_fl;
    end
  end
endmodule
