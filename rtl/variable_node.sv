// variable_node: ADMM-LP variable update for one variable of degree DV.
//
//   t_i = sum of the DV incoming check messages - gamma_i     (Q4.7 for
//         DV = 3: the adder tree adds ceil(log2(DV+1)) integer bits)
//   s_i = t_i + alpha if t_i > 0, t_i if t_i = 0, t_i - alpha if t_i < 0
//   x_i = s_i / DV clipped to [-1/2, 1/2]
// The adder tree is pipelined with a register after each level.  The
// division by the fixed degree is a shift when DV is a power of two and
// otherwise a multiplication by the 25-bit constant round(2^24/DV)
// (Q0.24), as on a DSP block.  The clipped value is rounded to Q0.9 for
// the check messages (x_out) and to Q0.7 for the estimate memory (xe_out);
// rounding is to nearest with ties away from zero.
// Inputs: m in Q2.7, gamma in Q0.7, alpha a non-negative Q0.7 value.
// Latency LAT = ceil(log2(DV+1)) + 3 cycles, one variable per cycle.
module variable_node #(
  parameter int DV = 3
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic signed [admm_pkg::CTV_W-1:0] m_in [DV],  // Q2.7
  input  logic signed [admm_pkg::LLR_W-1:0] gamma,      // Q0.7
  input  logic        [admm_pkg::LLR_W-1:0] alpha,      // Q0.7, >= 0
  output logic                              out_valid,
  output logic signed [admm_pkg::VTC_W-1:0] x_out,      // Q0.9
  output logic signed [admm_pkg::LLR_W-1:0] xe_out      // Q0.7
);
  import admm_pkg::*;

  localparam int LT  = log2_exact(DV + 1);
  localparam int TW  = CTV_W + LT;          // t_i
  localparam int SW  = TW + 1;              // s_i
  localparam int NW  = SW + RECIP_W;        // normalised, 31 fraction bits
  localparam int LAT = LT + 3;

  // ----------------------------------------------------------- adder tree
  logic signed [CTV_W-1:0] ops [DV+1];
  for (genvar i = 0; i < DV; i++) begin : g_ops
    assign ops[i] = m_in[i];
  end
  assign ops[DV] = -CTV_W'(gamma);

  logic signed [TW-1:0] t;
  adder_tree #(.N(DV+1), .IW(CTV_W), .OW(TW)) u_tree (.clk, .din(ops), .sum(t));

  logic [LLR_W-1:0] alpha_d;
  delay_line #(.W(LLR_W), .N(LT)) u_adl (.clk, .rst_n, .d(alpha), .q(alpha_d));

  // ---------------------------------------------------------- penalisation
  logic signed [SW-1:0] s;
  always_ff @(posedge clk) begin
    if (t > 0)      s <= SW'(t) + SW'($signed({1'b0, alpha_d}));
    else if (t < 0) s <= SW'(t) - SW'($signed({1'b0, alpha_d}));
    else            s <= SW'(t);
  end

  // --------------------------------------------------------- normalisation
  logic signed [NW-1:0] n;
  if (is_pow2(DV)) begin : g_shift
    always_ff @(posedge clk) n <= NW'(s) <<< (RECIP_F - log2_exact(DV));
  end else begin : g_mult
    localparam logic signed [RECIP_W-1:0] RC = recip(DV);
    always_ff @(posedge clk) n <= NW'(s) * NW'(RC);
  end

  // ------------------------------------------------ clip, round and format
  localparam longint HALF31 = longint'(1) <<< 30;
  always_ff @(posedge clk) begin
    if (longint'(n) > HALF31) begin
      x_out  <= VTC_W'(1 << 8);
      xe_out <= LLR_W'(1 << 6);
    end else if (longint'(n) < -HALF31) begin
      x_out  <= -VTC_W'(1 << 8);
      xe_out <= -LLR_W'(1 << 6);
    end else begin
      x_out  <= VTC_W'(rnd_shr(longint'(n), 22));
      xe_out <= LLR_W'(rnd_shr(longint'(n), 24));
    end
  end

  delay_line #(.W(1), .N(LAT)) u_vld (.clk, .rst_n, .d(in_valid), .q(out_valid));
endmodule
