// tb_decoder_controller: test of the iteration scheduler.
//
// The node pipelines are replaced by shift registers: vn_out_valid is
// vn_issue delayed by 1 + LV cycles and cn_out_valid is cn_issue delayed
// by 1 + LC cycles (one memory read cycle plus the node latency), as in
// the decoder.  par_fail is raised by the testbench during the check
// phases of the first K iterations only.  Checked, with P = 7 and at most
// 5 iterations:
//   - each phase issues exactly the offsets 0..P-1 in order;
//   - wr_addr runs 0..P-1 over the returned results of each phase;
//   - first_iter is high exactly during the first iteration;
//   - with early stopping on, decoding ends after K+1 iterations (the
//     first without a failed check) with early_stop set, or after 5 when
//     K >= 5; with it off, always after 5 iterations with early_stop clear;
//   - start to done takes iterations * (2P + 2 + LV + LC) + 2 cycles.
module tb_decoder_controller;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_early = 0, n_max = 0;

  localparam int P = 7, MAXI = 5, LV = 3, LC = 6, AW = $clog2(P);
  logic          start = 0, early_term_en = 0, par_fail = 0;
  logic          vn_issue, cn_issue, first_iter, busy, done, early_stop;
  logic [AW-1:0] rd_addr, wr_addr;
  logic [7:0]    iters;
  logic [LV:0]   vd = '0;
  logic [LC:0]   cd = '0;
  logic vn_out_valid, cn_out_valid;
  assign vn_out_valid = vd[LV];
  assign cn_out_valid = cd[LC];
  always @(posedge clk) begin
    vd <= {vd[LV-1:0], vn_issue & rst_n};
    cd <= {cd[LC-1:0], cn_issue & rst_n};
  end

  decoder_controller #(.P(P), .MAX_ITER(MAXI)) dut (
    .clk, .rst_n, .start, .early_term_en, .vn_out_valid, .cn_out_valid, .par_fail,
    .vn_issue, .cn_issue, .rd_addr, .wr_addr, .first_iter, .busy, .done, .iters, .early_stop);

  // per-phase sequence checks
  int vi = 0, ci = 0, vo = 0, co = 0, it = 0;
  int fail_iters = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (vn_issue) begin
        checks++;
        if (int'(rd_addr) != vi) begin failures++; $display("vn issue %0d addr %0d", vi, rd_addr); end
        vi = (vi + 1) % P;
      end
      if (cn_issue) begin
        checks++;
        if (int'(rd_addr) != ci) begin failures++; $display("cn issue %0d addr %0d", ci, rd_addr); end
        ci = (ci + 1) % P;
      end
      if (vn_out_valid) begin
        checks++;
        if (int'(wr_addr) != vo) begin failures++; $display("vn result %0d wr_addr %0d", vo, wr_addr); end
        vo = (vo + 1) % P;
      end
      if (cn_out_valid) begin
        checks++;
        if (int'(wr_addr) != co) begin failures++; $display("cn result %0d wr_addr %0d", co, wr_addr); end
        co = (co + 1) % P;
        if (co == 0) it++;
      end
      if (vn_issue || cn_issue) begin
        checks++;
        if (first_iter != (it == 0)) begin failures++; $display("first_iter %0d in iteration %0d", first_iter, it); end
      end
      if (vn_issue && cn_issue) begin failures++; $display("both phases issuing"); end
    end
  end
  // failed checks during the check phases of the first fail_iters iterations
  always @(negedge clk) par_fail <= cn_issue && (it < fail_iters) && ($urandom % 3 == 0 || ci == P - 1);

  task automatic run(input bit early, input int k);
    longint t0;
    int cy, want_it;
    bit want_es;
    fail_iters    = k;
    early_term_en <= early;
    it = 0;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cy = 1;
    while (!done) begin @(posedge clk); cy++; end
    want_it = (early && k < MAXI) ? k + 1 : MAXI;
    want_es = early && k < MAXI;
    checks += 4;
    if (int'(iters) != want_it) begin failures++; $display("early %0d K %0d: %0d iterations, expected %0d", early, k, iters, want_it); end
    if (early_stop != want_es) begin failures++; $display("early %0d K %0d: early_stop %0d", early, k, early_stop); end
    if (cy != want_it * (2 * P + 2 + LV + LC) + 2) begin failures++; $display("early %0d K %0d: %0d cycles, expected %0d", early, k, cy, want_it * (2 * P + 2 + LV + LC) + 2); end
    if (it != want_it) begin failures++; $display("counted %0d iterations", it); end
    if (early_stop) n_early++; else n_max++;
    repeat (3) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("busy after done"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int k = 0; k <= 6; k++) begin
      run(1'b1, k);
      run(1'b0, k);
    end
    checks += 2;
    if (n_early == 0) failures++;
    if (n_max == 0) failures++;
    $display("early stops %0d limit stops %0d", n_early, n_max);
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
