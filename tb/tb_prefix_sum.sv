// tb_prefix_sum: test of the pipelined prefix adder used by the simplex
// projection.
//
// A new random vector enters every cycle; LAT = ceil(log2 N) cycles later
// output i must equal BIAS + din[0] + ... + din[i], computed here with a
// running sum.  Sizes 6, 5 and 16 are tested with BIAS = -512 (minus one
// in Q4.9, as the simplex projection uses) and with BIAS = 0.
module tb_prefix_sum;
  import admm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [2:0] fin = '0;
  localparam int IW = VT_W, OW = VT_W + 5;

  for (genvar c = 0; c < 3; c++) begin : g
    localparam int N = (c == 0) ? 6 : (c == 1) ? 5 : 16;
    localparam int BIAS = (c == 1) ? 0 : -512;
    localparam int LAT = log2_exact(N);
    logic signed [IW-1:0] din [N];
    logic signed [OW-1:0] dout [N];
    int hist [1024][N];

    prefix_sum #(.N(N), .IW(IW), .OW(OW), .BIAS(BIAS)) dut (.clk, .din, .dout);

    initial begin
      for (int t = 0; t < 1000 + LAT; t++) begin
        for (int i = 0; i < N; i++) begin
          logic signed [IW-1:0] x;
          x = IW'($urandom);
          hist[t][i] = int'(x);
          din[i] <= x;
        end
        @(posedge clk);
        #1;
        if (t >= LAT - 1) begin
          int acc;
          acc = BIAS;
          for (int i = 0; i < N; i++) begin
            acc += hist[t - LAT + 1][i];
            checks++;
            if (int'(dout[i]) != acc) begin
              failures++;
              if (failures < 10) $display("N=%0d t=%0d i=%0d got %0d expected %0d", N, t, i, dout[i], acc);
            end
          end
        end
      end
      fin[c] = 1'b1;
    end
  end

  initial begin
    wait (fin == 3'b111);
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
