// prefix_sum: pipelined inclusive prefix sums of N signed values, with a
// constant BIAS added to the first operand, so that out[i] = BIAS +
// in[0] + ... + in[i].  The simplex projection uses BIAS = -1 (in the
// input's fixed-point scale) to fold the "-1" of its shift formula into
// the sums.  The structure is the minimum-depth (Sklansky) member of the
// Ladner-Fischer family: at level l every element whose index has bit l
// set adds the last element of the preceding 2^l block.  ceil(log2 N)
// levels, each registered: latency LAT = ceil(log2 N) (plus nothing for
// the bias, which is added combinationally at the input).  OW must hold
// IW + ceil(log2 N) + 1 bits.
module prefix_sum #(
  parameter int N    = 6,
  parameter int IW   = 14,
  parameter int OW   = 18,
  parameter int BIAS = -512
) (
  input  logic                 clk,
  input  logic signed [IW-1:0] din  [N],
  output logic signed [OW-1:0] dout [N]
);
  localparam int L = admm_pkg::log2_exact(N);

  logic signed [OW-1:0] lv [L+1][N];

  for (genvar i = 0; i < N; i++) begin : g_in
    if (i == 0) begin : g_b
      assign lv[0][i] = OW'(din[i]) + OW'(BIAS);
    end else begin : g_n
      assign lv[0][i] = OW'(din[i]);
    end
  end

  for (genvar l = 0; l < L; l++) begin : g_lvl
    for (genvar i = 0; i < N; i++) begin : g_node
      if (((i >> l) & 1) == 1) begin : g_add
        localparam int SRC = ((i >> l) << l) - 1;
        always_ff @(posedge clk) lv[l+1][i] <= lv[l][i] + lv[l][SRC];
      end else begin : g_pass
        always_ff @(posedge clk) lv[l+1][i] <= lv[l][i];
      end
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_out
    assign dout[i] = lv[L][i];
  end
endmodule
