// delay_line: N-stage shift register for a W-bit word (N = 0 is a wire).
// It carries values that a pipelined operator needs again later, such as
// the check-node sum v_j kept while the polytope projection runs.  The
// stages are reset to zero so that nothing downstream sees random data.
module delay_line #(
  parameter int W = 1,
  parameter int N = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (N == 0) begin : g_wire
    assign q = d;
  end else begin : g_sr
    logic [W-1:0] sr [N];
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int i = 0; i < N; i++) sr[i] <= '0;
      end else begin
        sr[0] <= d;
        for (int i = 1; i < N; i++) sr[i] <= sr[i-1];
      end
    end
    assign q = sr[N-1];
  end
endmodule
