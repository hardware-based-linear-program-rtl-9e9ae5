// admm_decoder: partially-parallel ADMM-LP decoder for a quasi-cyclic
// LDPC code made of R x S tiles of P x P circulant permutations.
//
// Datapath: S variable nodes (one per macro-column) and R check nodes (one
// per macro-row), all pipelined, exchange messages through banked
// memories with one bank per non-zero tile.  In the variable-node phase
// the controller walks the offset a = 0..P-1: the S LLR banks and the
// check-to-variable banks are read at a, the S variable nodes compute the
// new estimates, and these are written to the estimate memory and, at
// shifted addresses, to the variable-to-check banks.  In the check-node
// phase the controller walks the check offset j = 0..P-1: the
// variable-to-check and check-state banks are read at j, the R check
// nodes project onto the parity polytope and write new check states (at
// j) and check-to-variable messages (at shifted addresses).  Nodes of
// different degree have different pipeline depths; their outputs are
// padded to the deepest one so that one write offset serves all.
//
// Host interface: write the LLRs while idle (llr_we, llr_addr = offset
// within the macro-columns, llr_data = one Q0.7 LLR per macro-column;
// gamma_i = log P(y|0)/P(y|1), scaled to [-1,1)), pulse start, wait for
// done, read est_data (Q0.7, one cycle after est_addr); an estimate >= 0
// decodes to bit 1.  alpha is the penalty (Q0.7, e.g. 13 for 0.1, 0 for
// plain LP decoding).  With early_term_en the decoder stops as soon as the
// hard decisions of the estimates satisfy every check, otherwise after
// MAX_ITER iterations.
// Timing: one iteration takes 2P + 2 + (deepest VN latency) + (deepest
// CN latency) cycles, 366 for the default (3,6) code (VN 5, CN 25); done
// comes iterations * that + 2 cycles after start.
// Paper versus own choice: the architecture (S VNs, R CNs, banked LLR,
// estimate, message and check-state memories, shifts applied on the
// message writes) and the message formats follow the paper; the address
// convention of the circulants, the pipeline depths, zeroing lambda and
// m in the first iteration instead of clearing memories, and the parity
// check on the estimates read in the check phase are this design's own.
// The per-row signals sat_ev, pp_in and pp_fl (output saturation,
// polytope membership, parity flip of each check node) drive no logic;
// they are kept so that these events can be observed, and the tools
// report them as unused.
module admm_decoder #(
  parameter admm_pkg::code_e CODE = admm_pkg::CODE_ENSEMBLE,
  parameter int MAX_ITER = admm_pkg::MAX_ITER_DEFAULT,
  parameter int R  = admm_pkg::code_r(CODE),
  parameter int S  = admm_pkg::code_s(CODE),
  parameter int P  = admm_pkg::code_p(CODE),
  parameter int AW = $clog2(P)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [admm_pkg::LLR_W-1:0]  alpha,
  input  logic                        early_term_en,
  input  logic                        llr_we,
  input  logic [AW-1:0]               llr_addr,
  input  logic [admm_pkg::LLR_W-1:0]  llr_data [S],
  input  logic [AW-1:0]               est_addr,
  output logic [admm_pkg::LLR_W-1:0]  est_data [S],
  output logic                        busy,
  output logic                        done,
  output logic [7:0]                  iters,
  output logic                        early_stop
);
  import admm_pkg::*;

  function automatic int max_vn_lat();
    int m;
    m = 0;
    for (int k = 0; k < S; k++) if (vn_latency(col_deg(CODE, k)) > m) m = vn_latency(col_deg(CODE, k));
    return m;
  endfunction
  function automatic int max_cn_lat();
    int m;
    m = 0;
    for (int r = 0; r < R; r++) if (cn_latency(row_deg(CODE, r)) > m) m = cn_latency(row_deg(CODE, r));
    return m;
  endfunction
  localparam int VN_LAT = max_vn_lat();
  localparam int CN_LAT = max_cn_lat();

  // ------------------------------------------------------------ control
  logic          vn_issue, cn_issue, first_iter, par_fail;
  logic          vn_ov, cn_ov;
  logic [AW-1:0] rd_addr, wr_addr;

  decoder_controller #(.P(P), .MAX_ITER(MAX_ITER), .AW(AW)) u_ctrl (
    .clk, .rst_n, .start, .early_term_en,
    .vn_out_valid(vn_ov), .cn_out_valid(cn_ov), .par_fail,
    .vn_issue, .cn_issue, .rd_addr, .wr_addr, .first_iter,
    .busy, .done, .iters, .early_stop);

  logic vn_in_valid, cn_in_valid;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vn_in_valid <= 1'b0;
      cn_in_valid <= 1'b0;
    end else begin
      vn_in_valid <= vn_issue;
      cn_in_valid <= cn_issue;
    end
  end

  // ------------------------------------------------------------ memories
  logic [LLR_W-1:0] llr_rd [S];
  logic [AW-1:0]    llr_wa;
  assign llr_wa = llr_addr;
  llr_memory #(.S(S), .P(P), .AW(AW)) u_llr (
    .clk, .we(llr_we & ~busy), .waddr(llr_wa), .wdata(llr_data),
    .raddr(rd_addr), .rdata(llr_rd));

  logic [VTC_W-1:0] x_wr  [S];
  logic [LLR_W-1:0] xe_wr [S];
  logic [VTC_W-1:0] vtc_rd [R][S];
  logic [CTV_W-1:0] ctv_rd [R][S];
  logic [CTV_W-1:0] lam_rd [R][S];
  logic [CTV_W-1:0] lam_wr [R][S];
  logic [CTV_W-1:0] m_wr   [R][S];

  estimate_memory #(.S(S), .P(P), .AW(AW)) u_est (
    .clk, .we(vn_ov), .waddr(wr_addr), .wdata(xe_wr),
    .raddr(est_addr), .rdata(est_data));

  vtc_memory #(.CODE(CODE), .R(R), .S(S), .P(P), .AW(AW)) u_vtc (
    .clk, .we(vn_ov), .waddr(wr_addr), .wdata(x_wr),
    .raddr(rd_addr), .rdata(vtc_rd));

  ctv_memory #(.CODE(CODE), .R(R), .S(S), .P(P), .AW(AW)) u_ctv (
    .clk, .we(cn_ov), .waddr(wr_addr), .wdata(m_wr),
    .raddr(rd_addr), .rdata(ctv_rd));

  check_state_memory #(.CODE(CODE), .R(R), .S(S), .P(P), .AW(AW)) u_cs (
    .clk, .we(cn_ov), .waddr(wr_addr), .wdata(lam_wr),
    .raddr(rd_addr), .rdata(lam_rd));

  // ------------------------------------------------------ variable nodes
  logic [S-1:0] vn_ov_k;
  for (genvar k = 0; k < S; k++) begin : g_vn
    localparam int DV  = col_deg(CODE, k);
    localparam int PAD = VN_LAT - vn_latency(DV);
    logic signed [CTV_W-1:0] m_in [DV];
    for (genvar e = 0; e < DV; e++) begin : g_m
      assign m_in[e] = first_iter ? '0 : $signed(ctv_rd[row_of(CODE, k, e)][k]);
    end
    logic                    ov;
    logic signed [VTC_W-1:0] x;
    logic signed [LLR_W-1:0] xe;
    variable_node #(.DV(DV)) u_vn (
      .clk, .rst_n, .in_valid(vn_in_valid), .m_in, .gamma($signed(llr_rd[k])),
      .alpha, .out_valid(ov), .x_out(x), .xe_out(xe));
    logic [VTC_W+LLR_W:0] pk, pk_d;
    assign pk = {ov, x, xe};
    delay_line #(.W(VTC_W+LLR_W+1), .N(PAD)) u_pad (.clk, .rst_n, .d(pk), .q(pk_d));
    assign vn_ov_k[k] = pk_d[VTC_W+LLR_W];
    assign x_wr[k]    = pk_d[LLR_W +: VTC_W];
    assign xe_wr[k]   = pk_d[0 +: LLR_W];
  end
  assign vn_ov = vn_ov_k[0];

  // --------------------------------------------------------- check nodes
  logic [R-1:0] cn_ov_r, row_fail;
  for (genvar r = 0; r < R; r++) begin : g_cn
    localparam int D   = row_deg(CODE, r);
    localparam int PAD = CN_LAT - cn_latency(D);
    logic signed [VTC_W-1:0] x_in    [D];
    logic signed [CTV_W-1:0] lam_in  [D];
    logic signed [CTV_W-1:0] lam_out [D];
    logic signed [CTV_W-1:0] m_out   [D];
    logic [D-1:0]            hard;
    for (genvar e = 0; e < D; e++) begin : g_in
      assign x_in[e]   = $signed(vtc_rd[r][col_of(CODE, r, e)]);
      assign lam_in[e] = first_iter ? '0 : $signed(lam_rd[r][col_of(CODE, r, e)]);
      assign hard[e]   = ~x_in[e][VTC_W-1];
    end
    // parity of the hard decisions of this check
    assign row_fail[r] = cn_in_valid & (^hard);

    logic ov, sat_ev, pp_in, pp_fl;
    check_node #(.D(D)) u_cn (
      .clk, .rst_n, .in_valid(cn_in_valid), .x_in, .lam_in,
      .out_valid(ov), .lam_out, .m_out,
      .sat_event(sat_ev), .pp_inside(pp_in), .pp_flipped(pp_fl));

    logic [2*D*CTV_W:0] pk, pk_d;
    for (genvar e = 0; e < D; e++) begin : g_pk
      assign pk[e*CTV_W +: CTV_W]       = lam_out[e];
      assign pk[(D+e)*CTV_W +: CTV_W]   = m_out[e];
    end
    assign pk[2*D*CTV_W] = ov;
    delay_line #(.W(2*D*CTV_W+1), .N(PAD)) u_pad (.clk, .rst_n, .d(pk), .q(pk_d));
    assign cn_ov_r[r] = pk_d[2*D*CTV_W];

    // scatter back to the tile grid; empty tiles carry zero
    for (genvar k = 0; k < S; k++) begin : g_out
      localparam int SH = code_shift(CODE, r, k);
      if (SH >= 0) begin : g_t
        localparam int E = tile_index(r, k);
        assign lam_wr[r][k] = pk_d[E*CTV_W +: CTV_W];
        assign m_wr[r][k]   = pk_d[(D+E)*CTV_W +: CTV_W];
      end else begin : g_z
        assign lam_wr[r][k] = '0;
        assign m_wr[r][k]   = '0;
      end
    end
  end
  assign cn_ov    = cn_ov_r[0];
  assign par_fail = |row_fail;

  // All node pipelines are padded to the same depth, so their results
  // arrive together.
  a_vn_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                                 (vn_ov_k == '0) || (vn_ov_k == '1));
  a_cn_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                                 (cn_ov_r == '0) || (cn_ov_r == '1));

  // position of tile (r,k) among the non-zero tiles of row r
  function automatic int tile_index(input int r, input int k);
    int n;
    n = 0;
    for (int kk = 0; kk < k; kk++) if (code_shift(CODE, r, kk) >= 0) n++;
    return n;
  endfunction
endmodule
