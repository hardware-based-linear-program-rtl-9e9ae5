// tb_admm_decoder: end-to-end test of the decoder at its default size,
// the (3,6)-regular [1002,503] code with 167 x 167 tiles, 60 iterations.
//
// Random codewords are drawn from the code's null space, sent as BPSK
// over an AWGN channel (outputs saturated at 1 + sigma and scaled into
// Q0.7), decoded, and the hard decisions read back from the estimate
// memory are compared bit by bit with the transmitted word.  Frames:
//   - noiseless frame: must decode and stop after exactly 1 iteration;
//   - Eb/N0 = 3 dB with penalty 0.1 and with penalty 0, early stop on:
//     must decode correctly;
//   - Eb/N0 = 3 dB with early stop off: must run all 60 iterations and
//     decode correctly;
//   - Eb/N0 = 0 dB: decoding may fail; only termination is checked.
// Each frame's cycle count is checked against
//   iterations * (2P + 2 + VN latency + CN latency) + 2
// (one cycle for start to reach the controller, one for the done pulse).
// Also run: frames of random full-scale LLRs, which are not near any
// codeword, with and without the penalty, for 60 iterations.
// Mechanisms counted (each must occur): early termination, stop at the
// iteration limit, penalised and unpenalised runs, polytope projections
// that keep the clipped input and that use the simplex, parity flips in
// facet identification.  Check-node output saturation to Q2.7 is counted
// and printed but not required: in these runs the Lagrange multipliers
// stayed well inside +-4, so it is exercised only in the check-node test.
module tb_admm_decoder;
  import admm_pkg::*;
  import tb_ref_pkg::*;

  localparam code_e CODE = CODE_ENSEMBLE;
  localparam int S = code_s(CODE);
  localparam int P = code_p(CODE);
  localparam int N = S * P;
  localparam int AW = $clog2(P);
  localparam int ITER_CYC = 2 * P + 2 + vn_latency(3) + cn_latency(6);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic             start = 0, early_term_en = 0, llr_we = 0;
  logic [LLR_W-1:0] alpha = '0;
  logic [AW-1:0]    llr_addr = '0, est_addr = '0;
  logic [LLR_W-1:0] llr_data [S];
  logic [LLR_W-1:0] est_data [S];
  logic             busy, done, early_stop;
  logic [7:0]       iters;

  admm_decoder dut (.clk, .rst_n, .start, .alpha, .early_term_en, .llr_we, .llr_addr,
                    .llr_data, .est_addr, .est_data, .busy, .done, .iters, .early_stop);

  // ---------------------------------------------------- mechanism probes
  int n_sat = 0, n_in = 0, n_out = 0, n_flip = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.g_cn[0].ov) begin
        n_sat  += int'(dut.g_cn[0].sat_ev) + int'(dut.g_cn[1].sat_ev) + int'(dut.g_cn[2].sat_ev);
        n_in   += int'(dut.g_cn[0].pp_in)  + int'(dut.g_cn[1].pp_in)  + int'(dut.g_cn[2].pp_in);
        n_out  += 3 - (int'(dut.g_cn[0].pp_in) + int'(dut.g_cn[1].pp_in) + int'(dut.g_cn[2].pp_in));
        n_flip += int'(dut.g_cn[0].pp_fl)  + int'(dut.g_cn[1].pp_fl)  + int'(dut.g_cn[2].pp_fl);
      end
    end
  end

  int n_early = 0, n_maxit = 0, n_pen = 0, n_nopen = 0;

  task automatic run_frame(input string name, input real sigma, input int a, input bit early,
                           input bit must_decode, input int want_iters);
    logic [NMAX-1:0] cw;
    int errs;
    longint t0, t1;
    cw = code_random_word();
    checks++;
    if (code_syndrome_weight(cw) != 0) begin failures++; $display("%s: generator made a non-codeword", name); end
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
    $display("%s: iterations %0d early %0d bit errors %0d cycles %0d", name, iters, early_stop, errs, t1 - t0);
    if (early_stop) n_early++;
    if (int'(iters) == 60) n_maxit++;
    if (a != 0) n_pen++; else n_nopen++;
    checks++;
    if (t1 - t0 != longint'(iters) * ITER_CYC + 2) begin
      failures++; $display("%s: cycles %0d expected %0d", name, t1 - t0, longint'(iters) * ITER_CYC + 2);
    end
    if (must_decode) begin
      checks++;
      if (errs != 0) begin failures++; $display("%s: not decoded", name); end
    end
    if (want_iters > 0) begin
      checks++;
      if (int'(iters) != want_iters) begin failures++; $display("%s: %0d iterations, expected %0d", name, iters, want_iters); end
    end
    checks++;
    if (int'(iters) < 1 || int'(iters) > 60) failures++;
    checks++;
    if (!early && early_stop) failures++;
  endtask

  initial begin
    real sig3;
    code_build(CODE);
    // Eb/N0 = 3 dB at rate 1/2: sigma^2 = 1 / (2 R Eb/N0)
    sig3 = $sqrt(1.0 / (2.0 * 0.5 * (10.0 ** 0.3)));
    for (int k = 0; k < S; k++) llr_data[k] = '0;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_frame("noiseless",       0.0,  13, 1, 1, 1);
    run_frame("3dB alpha=0.1 a", sig3, 13, 1, 1, 0);
    run_frame("3dB alpha=0.1 b", sig3, 13, 1, 1, 0);
    run_frame("3dB alpha=0 a",   sig3, 0,  1, 1, 0);
    run_frame("3dB alpha=0 b",   sig3, 0,  1, 1, 0);
    run_frame("3dB no early",    sig3, 13, 0, 1, 60);
    run_frame("0dB",             1.0,  13, 1, 0, 0);
    run_frame("random LLR a=0",  -1.0, 0,  0, 0, 60);
    run_frame("random LLR",      -1.0, 13, 0, 0, 60);
    checks += 6;
    if (n_early == 0) begin failures++; $display("early termination never happened"); end
    if (n_maxit == 0) begin failures++; $display("iteration limit never reached"); end
    if (n_pen == 0 || n_nopen == 0) begin failures++; $display("penalty modes not both run"); end
    if (n_in == 0)   begin failures++; $display("no projection kept the clipped input"); end
    if (n_out == 0)  begin failures++; $display("no projection used the simplex"); end
    if (n_flip == 0) begin failures++; $display("no parity flip"); end
    $display("mechanisms: early %0d maxit %0d pen %0d nopen %0d inside %0d simplex %0d flip %0d sat %0d",
             n_early, n_maxit, n_pen, n_nopen, n_in, n_out, n_flip, n_sat);
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
