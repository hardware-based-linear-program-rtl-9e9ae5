// tb_estimate_memory: test of the estimate memory: the hard-decision estimates, S banks
// of P words, written by the variable nodes and read by the host.
//
// The whole memory is written with random words, then read back at
// random addresses while random writes continue.  A model array holds
// the expected contents; the read data must equal the model exactly one
// cycle after the address is applied (synchronous read), and a write and
// a read of the same address in one cycle must return the old word.
// Default size: 6 banks of 167 words of 8 bits.
module tb_estimate_memory;
  import admm_pkg::*;
  localparam int S = 6, P = 167, W = LLR_W, AW = $clog2(P);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0]  wdata [S];
  logic [W-1:0]  rdata [S];
  logic [W-1:0]  model [S][P];

  estimate_memory dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    logic [W-1:0] exp_d [S];
    for (int a = 0; a < P; a++) begin
      for (int k = 0; k < S; k++) begin
        wdata[k] <= W'($urandom);
      end
      waddr <= AW'(a);
      we    <= 1'b1;
      @(posedge clk);
      #1;
      for (int k = 0; k < S; k++) model[k][a] = wdata[k];
    end
    we <= 1'b0;
    for (int n = 0; n < 3000; n++) begin
      int ra, wa;
      bit w;
      ra = $urandom % P;
      wa = (n % 7 == 0) ? ra : $urandom % P;
      w  = ($urandom % 2) != 0;
      raddr <= AW'(ra);
      waddr <= AW'(wa);
      we    <= w;
      for (int k = 0; k < S; k++) wdata[k] <= W'($urandom);
      for (int k = 0; k < S; k++) exp_d[k] = model[k][ra];
      @(posedge clk);
      #1;
      if (w) for (int k = 0; k < S; k++) model[k][wa] = wdata[k];
      for (int k = 0; k < S; k++) begin
        checks++;
        if (rdata[k] !== exp_d[k]) begin
          failures++;
          if (failures < 10) $display("bank %0d addr %0d: got %h expected %h", k, ra, rdata[k], exp_d[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
