// adder_tree: pipelined minimum-depth sum of N signed IW-bit operands into
// an OW-bit result.  Operands are sign extended to OW bits and added in
// pairs, ceil(log2 N) levels with a register after every level, so the
// latency is LAT = ceil(log2 N) cycles (0 for N = 1).  The caller chooses
// OW wide enough that no level overflows (IW + ceil(log2 N) bits).
// Used for the variable-node sum and the polytope membership test.
module adder_tree #(
  parameter int N  = 4,
  parameter int IW = 10,
  parameter int OW = 12
) (
  input  logic                 clk,
  input  logic signed [IW-1:0] din [N],
  output logic signed [OW-1:0] sum
);
  localparam int LAT = admm_pkg::log2_exact(N);
  localparam int NP  = 1 << LAT;

  logic signed [OW-1:0] lvl [LAT+1][NP];

  for (genvar i = 0; i < NP; i++) begin : g_in
    if (i < N) begin : g_op
      assign lvl[0][i] = OW'(din[i]);
    end else begin : g_pad
      assign lvl[0][i] = '0;
    end
  end

  for (genvar l = 0; l < LAT; l++) begin : g_lvl
    for (genvar i = 0; i < NP; i++) begin : g_node
      if (i < (NP >> (l + 1))) begin : g_add
        always_ff @(posedge clk) lvl[l+1][i] <= lvl[l][2*i] + lvl[l][2*i+1];
      end else begin : g_unused
        assign lvl[l+1][i] = '0;
      end
    end
  end

  assign sum = lvl[LAT][0];
endmodule
