// simplex_projection: Euclidean projection of a D-vector onto the centred
// probability simplex {w : sum(w + 1/2) = 1, w >= -1/2}.
//
// Following the shift-and-clip method, the input v (Q4.9) is sorted in
// descending order into rho; the prefix sums of rho with -1 folded in are
// divided by their index to give the candidate shifts
//   u_i = (rho_1 + ... + rho_i - 1) / i ;
// the largest i with rho_i > u_i selects the common shift u*, and the
// output is w_k = max(v_k - u* - 1/2, -1/2) in Q0.13.
//
// Pipeline (one vector per cycle, no stalls):
//   sort LS = L(L+1)/2 | prefix sum L | normalise 1 | compare 1 |
//   priority encode + select 1 | shift and clip 1,  L = ceil(log2 D).
// Division by i uses a shift when i is a power of two and otherwise a
// multiplication by the constant round(2^24 / i) (25-bit, Q0.24).  The
// shifts u_i are kept with 13 fraction bits (this design's choice; the
// paper gives no width for them).  Outputs are saturated to the Q0.13
// range.  in_valid travels with the data to out_valid.
module simplex_projection #(
  parameter int D = 6
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic signed [admm_pkg::VT_W-1:0] vin  [D],   // Q4.9
  output logic                          out_valid,
  output logic signed [admm_pkg::SP_W-1:0] wout [D]    // Q0.13
);
  import admm_pkg::*;

  localparam int L    = log2_exact(D);
  localparam int LS   = L * (L + 1) / 2;
  localparam int LP   = L;
  localparam int LAT  = LS + LP + 4;
  localparam int PS_W = VT_W + L + 1;        // prefix sums, 9 fraction bits
  localparam int UW   = PS_W + 4;            // shifts, 13 fraction bits
  localparam int PW   = PS_W + RECIP_W;      // product width

  // ---------------------------------------------------------------- sort
  logic signed [VT_W-1:0] rho [D];
  sorting_network #(.N(D), .W(VT_W)) u_sort (.clk, .din(vin), .dout(rho));

  // ---------------------------------------------------------- prefix sum
  logic signed [PS_W-1:0] psum [D];
  prefix_sum #(.N(D), .IW(VT_W), .OW(PS_W), .BIAS(-(1 << 9))) u_pfx (
    .clk, .din(rho), .dout(psum));

  // rho delayed to line up with psum
  logic [D*VT_W-1:0] rho_pk, rho_pk_d;
  logic signed [VT_W-1:0] rho_d [D];
  for (genvar i = 0; i < D; i++) begin : g_rpk
    assign rho_pk[i*VT_W +: VT_W] = rho[i];
    assign rho_d[i] = rho_pk_d[i*VT_W +: VT_W];
  end
  delay_line #(.W(D*VT_W), .N(LP)) u_rho_dl (.clk, .rst_n, .d(rho_pk), .q(rho_pk_d));

  // ----------------------------------------------------------- normalise
  logic signed [UW-1:0]   u_n   [D];
  logic signed [VT_W-1:0] rho_n [D];
  for (genvar i = 0; i < D; i++) begin : g_norm
    localparam int IDX = i + 1;
    if (is_pow2(IDX)) begin : g_shift
      // (S * 16) / 2^k is exact for k <= 4, i.e. for every D <= 16.
      always_ff @(posedge clk) u_n[i] <= (UW'(psum[i]) <<< 4) >>> log2_exact(IDX);
    end else begin : g_mult
      localparam logic signed [RECIP_W-1:0] RC = recip(IDX);
      logic signed [PW-1:0] prod;
      assign prod = PW'(psum[i]) * PW'(RC);
      always_ff @(posedge clk) u_n[i] <= UW'((prod + (PW'(1) <<< 19)) >>> 20);
    end
    always_ff @(posedge clk) rho_n[i] <= rho_d[i];
  end

  // ------------------------------------------------------------- compare
  logic [D-1:0]          gt;
  logic signed [UW-1:0]  u_c [D];
  for (genvar i = 0; i < D; i++) begin : g_cmp
    always_ff @(posedge clk) begin
      gt[i]  <= (UW'(rho_n[i]) <<< 4) > u_n[i];
      u_c[i] <= u_n[i];
    end
  end

  // ------------------------------------------ priority encode and select
  logic [D-1:0] onehot;
  priority_encoder #(.N(D)) u_pe (.req(gt), .onehot);

  logic signed [UW-1:0] u_star;
  always_ff @(posedge clk) begin
    logic signed [UW-1:0] acc;
    acc = '0;
    for (int i = 0; i < D; i++) if (onehot[i]) acc = acc | u_c[i];
    u_star <= acc;
  end

  // ------------------------------------------------ input delayed to here
  logic [D*VT_W-1:0] v_pk, v_pk_d;
  logic signed [VT_W-1:0] v_d [D];
  for (genvar i = 0; i < D; i++) begin : g_vpk
    assign v_pk[i*VT_W +: VT_W] = vin[i];
    assign v_d[i] = v_pk_d[i*VT_W +: VT_W];
  end
  delay_line #(.W(D*VT_W), .N(LAT - 1)) u_v_dl (.clk, .rst_n, .d(v_pk), .q(v_pk_d));

  // ------------------------------------------------------ shift and clip
  localparam int HALF13 = 1 << 12;          // 1/2 in Q.13
  localparam int SMAX   = (1 << (SP_W - 1)) - 1;
  for (genvar i = 0; i < D; i++) begin : g_out
    logic signed [UW:0] diff;
    assign diff = ((UW+1)'(v_d[i]) <<< 4) - (UW+1)'(u_star) - (UW+1)'(HALF13);
    always_ff @(posedge clk) begin
      if (diff < -(UW+1)'(HALF13))    wout[i] <= SP_W'(-HALF13);
      else if (diff > (UW+1)'(SMAX))  wout[i] <= SP_W'(SMAX);
      else                            wout[i] <= SP_W'(diff);
    end
  end

  delay_line #(.W(1), .N(LAT)) u_vld (.clk, .rst_n, .d(in_valid), .q(out_valid));
endmodule
