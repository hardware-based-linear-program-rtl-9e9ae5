// tb_facet_id: test of facet identification for the parity polytope.
//
// For each input v, f_i = 1 where v_i >= 0; if the number of ones is even,
// the bit at the smallest |v_i| (lowest index on ties) is flipped and
// flipped = 1.  The expected result is computed here by a direct loop and
// compared LAT = ceil(log2 D) + 1 cycles after the input, with a new
// vector every cycle.  Sizes 6, 5 and 16 are tested; vectors with small
// repeated magnitudes exercise ties and zeros.
module tb_facet_id;
  import admm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_flip = 0;
  logic [2:0] fin = '0;

  for (genvar c = 0; c < 3; c++) begin : g
    localparam int D = (c == 0) ? 6 : (c == 1) ? 5 : 16;
    localparam int LAT = log2_exact(D) + 1;
    logic signed [V_W-1:0] v [D];
    logic [D-1:0] f;
    logic flipped;
    int hist [1024][D];

    facet_id #(.D(D)) dut (.clk, .rst_n, .v, .f, .flipped);

    initial begin
      wait (rst_n);
      for (int t = 0; t < 1000 + LAT; t++) begin
        for (int i = 0; i < D; i++) begin
          logic signed [V_W-1:0] x;
          x = (t % 4 == 0) ? V_W'(int'($urandom % 7) - 3) : V_W'($urandom);
          hist[t][i] = int'(x);
          v[i] <= x;
        end
        @(posedge clk);
        #1;
        if (t >= LAT - 1) begin
          logic [D-1:0] ef;
          int wgt, im, am;
          wgt = 0; im = 0; am = 1 << 30;
          for (int i = 0; i < D; i++) begin
            int a;
            ef[i] = hist[t - LAT + 1][i] >= 0;
            wgt += int'(ef[i]);
            a = (hist[t - LAT + 1][i] < 0) ? -hist[t - LAT + 1][i] : hist[t - LAT + 1][i];
            if (a < am) begin am = a; im = i; end
          end
          if (wgt % 2 == 0) ef[im] = ~ef[im];
          checks += 2;
          if (f !== ef) begin
            failures++;
            if (failures < 10) $display("D=%0d t=%0d f %b expected %b", D, t, f, ef);
          end
          if (flipped !== (wgt % 2 == 0)) failures++;
          if (flipped) n_flip++;
        end
      end
      fin[c] = 1'b1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    wait (fin == 3'b111);
    checks++;
    if (n_flip == 0) failures++;
    $display("flips %0d", n_flip);
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
