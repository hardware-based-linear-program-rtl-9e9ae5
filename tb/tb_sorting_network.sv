// tb_sorting_network: test of the pipelined descending sorter used by the
// simplex projection.
//
// A new random vector enters every cycle; the output LAT = L(L+1)/2
// cycles later (L = ceil(log2 N)) must be the same vector sorted in
// descending order, computed here with a plain insertion sort.  Sizes 6
// (the check degree of the (3,6) code), 5 and 16 are tested; vectors
// with many repeated values are included.
module tb_sorting_network;
  import admm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [2:0] fin = '0;
  localparam int W = VT_W;

  for (genvar c = 0; c < 3; c++) begin : g
    localparam int N = (c == 0) ? 6 : (c == 1) ? 5 : 16;
    localparam int L = log2_exact(N);
    localparam int LAT = L * (L + 1) / 2;
    logic signed [W-1:0] din [N];
    logic signed [W-1:0] dout [N];
    logic signed [W-1:0] hist [1024][N];

    sorting_network #(.N(N), .W(W)) dut (.clk, .din, .dout);

    initial begin
      for (int t = 0; t < 1000 + LAT; t++) begin
        for (int i = 0; i < N; i++) begin
          logic signed [W-1:0] x;
          x = (t % 3 == 0) ? W'(int'($urandom % 5) - 2) : W'($urandom);
          hist[t][i] = x;
          din[i] <= x;
        end
        @(posedge clk);
        #1;
        if (t >= LAT - 1) begin
          logic signed [W-1:0] e [N];
          e = hist[t - LAT + 1];
          for (int i = 1; i < N; i++) begin
            for (int j = i; j > 0 && e[j] > e[j-1]; j--) begin
              logic signed [W-1:0] tmp;
              tmp = e[j]; e[j] = e[j-1]; e[j-1] = tmp;
            end
          end
          for (int i = 0; i < N; i++) begin
            checks++;
            if (dout[i] !== e[i]) begin
              failures++;
              if (failures < 10) $display("N=%0d t=%0d i=%0d got %0d expected %0d", N, t, i, dout[i], e[i]);
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
