// vtc_memory: variable-to-check message memory.  One bank of depth P for
// every non-zero P x P tile (r,k) of the quasi-cyclic parity-check matrix.
// Tile (r,k) with shift sh joins check j of macro-row r to variable
// (j + sh) mod P of macro-column k.  Banks are kept in check order: the
// variable nodes write the estimate of offset a into bank (r,k) at address
// (a - sh) mod P, so that the check nodes read all banks of macro-row r at
// the plain check address j.  All S estimates of one offset are written in
// one cycle (every variable sends the same value to all of its checks);
// all R x S messages of one check offset are read in one cycle, read data
// one cycle after the address.  Outputs of all-zero tiles read as zero.
module vtc_memory #(
  parameter admm_pkg::code_e CODE = admm_pkg::CODE_ENSEMBLE,
  parameter int R  = admm_pkg::code_r(CODE),
  parameter int S  = admm_pkg::code_s(CODE),
  parameter int P  = admm_pkg::code_p(CODE),
  parameter int W  = admm_pkg::VTC_W,
  parameter int AW = $clog2(P)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,            // variable offset a
  input  logic [W-1:0]  wdata [S],        // x of offset a, per column
  input  logic [AW-1:0] raddr,            // check offset j
  output logic [W-1:0]  rdata [R][S]
);
  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar k = 0; k < S; k++) begin : g_col
      localparam int SH = admm_pkg::code_shift(CODE, r, k);
      if (SH >= 0) begin : g_tile
        logic [AW:0]   diff;
        logic [AW-1:0] wa;
        assign diff = {1'b0, waddr} + (AW+1)'(P - SH);
        assign wa   = (diff >= (AW+1)'(P)) ? AW'(diff - (AW+1)'(P)) : AW'(diff);
        sdp_ram #(.W(W), .DEPTH(P), .AW(AW)) u_ram (
          .clk, .we, .waddr(wa), .wdata(wdata[k]), .raddr, .rdata(rdata[r][k]));
      end else begin : g_zero
        assign rdata[r][k] = '0;
      end
    end
  end
endmodule
