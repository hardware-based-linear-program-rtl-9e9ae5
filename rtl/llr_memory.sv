// llr_memory: channel LLR storage, one bank of depth P per macro-column
// (S banks), Q0.7 words.  The host writes one word per bank per cycle
// (S LLRs of the same offset within their macro-columns); during the
// variable-node phase all S banks are read in parallel at the same
// address to feed the S variable nodes.  Synchronous write, read data one
// cycle after the address.
module llr_memory #(
  parameter int S  = 6,
  parameter int P  = 167,
  parameter int W  = admm_pkg::LLR_W,
  parameter int AW = $clog2(P)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata [S],
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata [S]
);
  for (genvar k = 0; k < S; k++) begin : g_bank
    sdp_ram #(.W(W), .DEPTH(P), .AW(AW)) u_ram (
      .clk, .we, .waddr, .wdata(wdata[k]), .raddr, .rdata(rdata[k]));
  end
endmodule
