// estimate_memory: current variable estimates x_i, one bank of depth P per
// macro-column (S banks), Q0.7 words (the decoder's output width).  The S
// variable nodes write their estimates in parallel at the offset they are
// processing; the host reads S estimates per cycle after decoding ends
// (read data one cycle after the address).  A non-negative estimate
// decodes to bit 1, a negative one to bit 0.
module estimate_memory #(
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
