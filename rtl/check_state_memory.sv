// check_state_memory: the dual variables lambda_j (check states), one
// bank of depth P per non-zero tile, kept in check order.  Only the check
// nodes use it, so read and write both use the plain check offset j with
// no shift.  R x S words are written and read per cycle; read data one
// cycle after the address.  All-zero tiles read as zero.
module check_state_memory #(
  parameter admm_pkg::code_e CODE = admm_pkg::CODE_ENSEMBLE,
  parameter int R  = admm_pkg::code_r(CODE),
  parameter int S  = admm_pkg::code_s(CODE),
  parameter int P  = admm_pkg::code_p(CODE),
  parameter int W  = admm_pkg::CTV_W,
  parameter int AW = $clog2(P)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata [R][S],
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata [R][S]
);
  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar k = 0; k < S; k++) begin : g_col
      localparam int SH = admm_pkg::code_shift(CODE, r, k);
      if (SH >= 0) begin : g_tile
        sdp_ram #(.W(W), .DEPTH(P), .AW(AW)) u_ram (
          .clk, .we, .waddr, .wdata(wdata[r][k]), .raddr, .rdata(rdata[r][k]));
      end else begin : g_zero
        assign rdata[r][k] = '0;
      end
    end
  end
endmodule
