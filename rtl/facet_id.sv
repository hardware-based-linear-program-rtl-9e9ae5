// facet_id: identifies the facet of the parity polytope that the
// projection works on (the closest odd-weight vertex of the cube).
//
// f_i = 1 where v_i >= 0 (the closest cube vertex, read from the sign
// bits).  If f has even weight (XOR of all bits is 0), the bit of f at the
// component with the smallest |v_i| is inverted, which makes the weight
// odd.  |v| is formed with one multiplexer per component (v or -v by the
// sign) and fed to a pipelined arg-min tree that returns a one-hot index;
// ties go to the lower index (this design's choice).  The vertex bits and
// the parity are carried alongside the tree.
// Latency LAT = ceil(log2 D) + 1 cycles; one vector per cycle.
module facet_id #(
  parameter int D = 6
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic signed [admm_pkg::V_W-1:0] v [D],   // Q3.9
  output logic [D-1:0]                   f,
  output logic                           flipped   // weight was even
);
  import admm_pkg::*;

  localparam int L  = log2_exact(D);
  localparam int NP = 1 << L;

  logic [D-1:0] f0;
  logic         even;
  logic [V_W-1:0] absv [D];
  for (genvar i = 0; i < D; i++) begin : g_abs
    assign f0[i]   = ~v[i][V_W-1];
    assign absv[i] = v[i][V_W-1] ? V_W'(-v[i]) : V_W'(v[i]);
  end
  assign even = ~(^f0);

  // arg-min tree: value and one-hot index per node
  logic [V_W-1:0] mv [L+1][NP];
  logic [D-1:0]   mi [L+1][NP];
  for (genvar i = 0; i < NP; i++) begin : g_leaf
    if (i < D) begin : g_op
      assign mv[0][i] = absv[i];
      assign mi[0][i] = D'(1) << i;
    end else begin : g_pad
      assign mv[0][i] = '1;
      assign mi[0][i] = '0;
    end
  end
  for (genvar l = 0; l < L; l++) begin : g_lvl
    for (genvar i = 0; i < NP; i++) begin : g_node
      if (i < (NP >> (l + 1))) begin : g_cmp
        always_ff @(posedge clk) begin
          if (mv[l][2*i+1] < mv[l][2*i]) begin
            mv[l+1][i] <= mv[l][2*i+1];
            mi[l+1][i] <= mi[l][2*i+1];
          end else begin
            mv[l+1][i] <= mv[l][2*i];
            mi[l+1][i] <= mi[l][2*i];
          end
        end
      end else begin : g_unused
        assign mv[l+1][i] = '0;
        assign mi[l+1][i] = '0;
      end
    end
  end

  logic [D:0] fe_d;
  delay_line #(.W(D+1), .N(L)) u_dl (.clk, .rst_n, .d({even, f0}), .q(fe_d));

  always_ff @(posedge clk) begin
    f       <= fe_d[D-1:0] ^ (mi[L][0] & {D{fe_d[D]}});
    flipped <= fe_d[D];
  end
endmodule
