// sorting_network: pipelined descending sort of N signed W-bit values.
//
// The sort is a fixed network of compare-swap cells (one comparator and
// two multiplexers each), so the same operations run whatever the input.
// This implementation uses Batcher's bitonic network on the next power of
// two NP >= N; the missing inputs are padded with the most negative value
// and fall to the bottom, so the first N outputs are the sorted inputs.
// Every network layer is followed by a register: latency
// LAT = L(L+1)/2 cycles with L = ceil(log2 N), one result per cycle.
// The paper calls for delay-optimal networks from Knuth's tables; the
// bitonic network has the same O((log N)^2) depth but is not optimal for
// every N (for N = 6 it uses 6 layers where 5 suffice).
module sorting_network #(
  parameter int N = 6,
  parameter int W = 14
) (
  input  logic                clk,
  input  logic signed [W-1:0] din  [N],
  output logic signed [W-1:0] dout [N]
);
  localparam int L    = admm_pkg::log2_exact(N);
  localparam int NP   = 1 << L;
  localparam int NLAY = L * (L + 1) / 2;

  logic signed [W-1:0] st [NLAY+1][NP];

  for (genvar i = 0; i < NP; i++) begin : g_in
    if (i < N) begin : g_op
      assign st[0][i] = din[i];
    end else begin : g_pad
      assign st[0][i] = {1'b1, {(W-1){1'b0}}};
    end
  end

  for (genvar a = 1; a <= L; a++) begin : g_blk
    for (genvar b = a - 1; b >= 0; b--) begin : g_lay
      localparam int Q = a * (a - 1) / 2 + (a - 1 - b);
      localparam int K = 1 << a;
      localparam int J = 1 << b;
      for (genvar i = 0; i < NP; i++) begin : g_cell
        if ((i & J) == 0) begin : g_cs
          // Cell on pair (i, i+J); within a block with (i & K) == 0 the
          // larger value goes to the lower index.
          localparam bit DESC = ((i & K) == 0);
          logic swap;
          assign swap = DESC ? (st[Q][i] < st[Q][i+J]) : (st[Q][i] > st[Q][i+J]);
          always_ff @(posedge clk) begin
            st[Q+1][i]   <= swap ? st[Q][i+J] : st[Q][i];
            st[Q+1][i+J] <= swap ? st[Q][i]   : st[Q][i+J];
          end
        end
      end
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_out
    assign dout[i] = st[NLAY][i];
  end
endmodule
