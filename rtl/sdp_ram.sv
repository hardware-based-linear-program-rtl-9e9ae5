// sdp_ram: simple dual-port memory, one synchronous write port and one
// synchronous read port (read data valid one cycle after the address), as
// an FPGA block RAM provides it.  A read of the address being written in
// the same cycle returns the old word.  The contents are not reset; the
// decoder never reads a word it has not written in the same frame, except
// in the first iteration, where the reader forces the data to zero.
module sdp_ram #(
  parameter int W     = 10,
  parameter int DEPTH = 167,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
