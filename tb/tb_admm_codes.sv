// tb_admm_codes: runs the decoder elaborated for the two other codes of
// the evaluation, the [155,64] Tanner code (3 x 5 tiles of 31) and the
// [672,546] IEEE 802.11ad code (3 x 16 tiles of 42, with all-zero tiles,
// check degrees 14 to 16 and variable degrees 1 to 3).
//
// For each code, random codewords of the code are sent as BPSK over AWGN
// (Eb/N0 = 4 dB for the Tanner code, 4.5 dB for the high-rate WiGig code),
// plus a noiseless frame, decoded with penalty 0.1 and early stopping,
// and the hard decisions compared with the sent word.  One frame per code
// runs all 60 iterations with early stopping off.  Cycle counts are
// checked against iterations * (2P + 2 + VN latency + CN latency) + 2,
// with the deepest node latencies of the code.  Early stops and runs to
// the iteration limit are counted and must both occur for each code.
module tb_admm_codes;
  import admm_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic [1:0] go = '0, fin = '0;

  for (genvar c = 0; c < 2; c++) begin : g
    localparam code_e CODE = (c == 0) ? CODE_TANNER : CODE_WIGIG;
    localparam int S = code_s(CODE);
    localparam int P = code_p(CODE);
    localparam int AW = $clog2(P);
    localparam int ITER_CYC = 2 * P + 2 + ((c == 0) ? vn_latency(3) + cn_latency(5) : vn_latency(3) + cn_latency(16));
    logic             start = 0, early_term_en = 0, llr_we = 0;
    logic [LLR_W-1:0] alpha = '0;
    logic [AW-1:0]    llr_addr = '0, est_addr = '0;
    logic [LLR_W-1:0] llr_data [S];
    logic [LLR_W-1:0] est_data [S];
    logic             busy, done, early_stop;
    logic [7:0]       iters;
    int n_early = 0, n_maxit = 0;

    admm_decoder #(.CODE(CODE)) dut (.clk, .rst_n, .start, .alpha, .early_term_en, .llr_we, .llr_addr,
                      .llr_data, .est_addr, .est_data, .busy, .done, .iters, .early_stop);

    task automatic run_frame(input string name, input real sigma, input int a, input bit early,
                             input bit must_decode, input int want_iters);
      logic [NMAX-1:0] cw;
      int errs;
      longint t0, t1;
      cw = code_random_word();
      checks++;
      if (code_syndrome_weight(cw) != 0) begin failures++; $display("code %0d %s: generator made a non-codeword", c, name); end
      // load LLRs, one word per offset
      for (int o = 0; o < P; o++) begin
        for (int k = 0; k < S; k++) begin
          int l;
          if (sigma < 0.0)       l = (($urandom % 2) != 0) ? 127 : -128;
          else if (sigma == 0.0) l = cw[k*P + o] ? -127 : 127;
          else                   l = channel_llr(cw[k*P + o], sigma);
          llr_data[k] <= LLR_W'(l);
        end
        llr_addr <= AW'(o);
        llr_we   <= 1'b1;
        @(posedge clk);
      end
      llr_we        <= 1'b0;
      alpha         <= LLR_W'(a);
      early_term_en <= early;
      start         <= 1'b1;
      t0 = cyc;
      @(posedge clk);
      start <= 1'b0;
      while (!done) @(posedge clk);
      t1 = cyc;
      // read back
      errs = 0;
      for (int o = 0; o < P; o++) begin
        est_addr <= AW'(o);
        @(posedge clk);
        #1;
        for (int k = 0; k < S; k++) begin
          bit hb;
          hb = !est_data[k][LLR_W-1];
          if (hb != cw[k*P + o]) errs++;
        end
      end
      @(posedge clk);
      $display("code %0d %s: iterations %0d early %0d bit errors %0d cycles %0d", c, name, iters, early_stop, errs, t1 - t0);
      if (early_stop) n_early++;
      if (int'(iters) == 60) n_maxit++;
      checks++;
      if (t1 - t0 != longint'(iters) * ITER_CYC + 2) begin
        failures++; $display("code %0d %s: cycles %0d expected %0d", c, name, t1 - t0, longint'(iters) * ITER_CYC + 2);
      end
      if (must_decode) begin
        checks++;
        if (errs != 0) begin failures++; $display("code %0d %s: not decoded", c, name); end
      end
      if (want_iters > 0) begin
        checks++;
        if (int'(iters) != want_iters) begin failures++; $display("code %0d %s: %0d iterations, expected %0d", c, name, iters, want_iters); end
      end
      checks++;
      if (int'(iters) < 1 || int'(iters) > 60) failures++;
      checks++;
      if (!early && early_stop) failures++;
    endtask

    initial begin
      real sg;
      for (int k = 0; k < S; k++) llr_data[k] = '0;
      wait (go[c]);
      code_build(CODE);
      sg = $sqrt(1.0 / (2.0 * ((c == 0) ? 0.4 : 0.8125) * (10.0 ** ((c == 0) ? 0.4 : 0.45))));
      run_frame("noiseless", 0.0, 13, 1, 1, 1);
      for (int f = 0; f < 4; f++) run_frame("awgn", sg, 13, 1, 1, 0);
      run_frame("no early", sg, 13, 0, 1, 60);
      checks += 2;
      if (n_early == 0) begin failures++; $display("code %0d: no early stop", c); end
      if (n_maxit == 0) begin failures++; $display("code %0d: no run to the limit", c); end
      fin[c] = 1'b1;
    end
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    go[0] = 1'b1;
    wait (fin[0]);
    go[1] = 1'b1;
    wait (fin[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
