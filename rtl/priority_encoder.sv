// priority_encoder: one-hot vector marking the highest-index set bit of
// req (all zero when req is zero).  Purely combinational; the simplex
// projection uses it to pick the largest i with rho_i > u_i.
module priority_encoder #(
  parameter int N = 6
) (
  input  logic [N-1:0] req,
  output logic [N-1:0] onehot
);
  always_comb begin
    logic seen;
    seen   = 1'b0;
    onehot = '0;
    for (int i = N - 1; i >= 0; i--) begin
      onehot[i] = req[i] & ~seen;
      seen      = seen | req[i];
    end
  end
endmodule
