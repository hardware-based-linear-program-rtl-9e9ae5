// ctv_memory: check-to-variable message memory.  One bank of depth P per
// non-zero tile (r,k), kept in variable order: the check nodes of
// macro-row r write the message of check offset j for tile (r,k) at
// address (j + sh) mod P, the variable offset it is meant for, so that
// the variable nodes read all banks of macro-column k at the plain
// variable address a.  All R x S messages of one check offset are written
// in one cycle; all R x S banks are read in one cycle at one address,
// read data one cycle after the address.  All-zero tiles read as zero.
module ctv_memory #(
  parameter admm_pkg::code_e CODE = admm_pkg::CODE_ENSEMBLE,
  parameter int R  = admm_pkg::code_r(CODE),
  parameter int S  = admm_pkg::code_s(CODE),
  parameter int P  = admm_pkg::code_p(CODE),
  parameter int W  = admm_pkg::CTV_W,
  parameter int AW = $clog2(P)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,            // check offset j
  input  logic [W-1:0]  wdata [R][S],
  input  logic [AW-1:0] raddr,            // variable offset a
  output logic [W-1:0]  rdata [R][S]
);
  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar k = 0; k < S; k++) begin : g_col
      localparam int SH = admm_pkg::code_shift(CODE, r, k);
      if (SH >= 0) begin : g_tile
        logic [AW:0]   sum;
        logic [AW-1:0] wa;
        assign sum = {1'b0, waddr} + (AW+1)'(SH);
        assign wa  = (sum >= (AW+1)'(P)) ? AW'(sum - (AW+1)'(P)) : AW'(sum);
        sdp_ram #(.W(W), .DEPTH(P), .AW(AW)) u_ram (
          .clk, .we, .waddr(wa), .wdata(wdata[r][k]), .raddr, .rdata(rdata[r][k]));
      end else begin : g_zero
        assign rdata[r][k] = '0;
      end
    end
  end
endmodule
