// tb_ctv_memory: test of the check-to-variable message memory.
//
// The memory is written in check order (offset j, one word per tile) and
// read in variable order (offset a).  For tile (r,k) with shift sh, check
// r*P+j is connected to variable k*P+((j+sh) mod P), so the word read for
// tile (r,k) at variable offset a must be the word written for that tile
// at check offset (a-sh) mod P; an all-zero tile must read 0.
// The expected value is computed here from the shift table,
// independently of the memory's address arithmetic.  Both the default
// (3,6) code and the WiGig code (which has all-zero tiles) are tested;
// read data is checked one cycle after the address (synchronous read).
module tb_ctv_memory;
  import admm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [1:0] fin = '0;

  for (genvar c = 0; c < 2; c++) begin : g
    localparam code_e C = (c == 0) ? CODE_ENSEMBLE : CODE_WIGIG;
    localparam int R = code_r(C), S = code_s(C), P = code_p(C), W = CTV_W, AW = $clog2(P);
    logic          we = 0;
    logic [AW-1:0] waddr = '0, raddr = '0;
    logic [W-1:0]  wdata [R][S];
    logic [W-1:0]  rdata [R][S];
    logic [W-1:0]  model [R][S][P];

    ctv_memory #(.CODE(C)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

    initial begin
      for (int pass = 0; pass < 3; pass++) begin
        for (int a = 0; a < P; a++) begin
          for (int r = 0; r < R; r++) begin
            for (int k = 0; k < S; k++) begin
              model[r][k][a] = W'($urandom);
              wdata[r][k] <= model[r][k][a];
            end
          end
          waddr <= AW'(a);
          we    <= 1'b1;
          @(posedge clk);
        end
        we <= 1'b0;
        for (int n = 0; n < P; n++) begin
          int j;
          j = (pass == 0) ? n : int'($urandom % P);
          raddr <= AW'(j);
          @(posedge clk);
          #1;
          for (int r = 0; r < R; r++) begin
            for (int k = 0; k < S; k++) begin
              int sh;
              logic [W-1:0] e;
              sh = code_shift(C, r, k);
              e  = (sh < 0) ? '0 : model[r][k][(j + P - sh) % P];
              checks++;
              if (rdata[r][k] !== e) begin
                failures++;
                if (failures < 10) $display("code %0d tile (%0d,%0d) j %0d: got %h expected %h", c, r, k, j, rdata[r][k], e);
              end
            end
          end
        end
      end
      fin[c] = 1'b1;
    end
  end

  initial begin
    wait (fin == 2'b11);
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
