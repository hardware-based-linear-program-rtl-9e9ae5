// decoder_controller: schedules the flooding iterations of the
// partially-parallel decoder.
//
// After start, every iteration is a variable-node phase followed by a
// check-node phase.  In each phase the controller issues the P offsets
// 0..P-1, one per cycle, as the shared read address of the memories, then
// waits until the pipelined nodes have returned all P results; wr_addr
// counts those results and is the write offset for the node outputs.
// first_iter is high during the first iteration, when the check states
// and check-to-variable messages are taken as zero instead of read.
// During the check-node phase par_fail reports checks whose hard
// decisions (from the estimates being read) are unsatisfied; if none was
// seen and early_term_en is set, decoding stops after that iteration
// because the estimates form a codeword.  Otherwise it stops after
// MAX_ITER iterations.  done pulses for one cycle at the end; iters and
// early_stop hold the outcome until the next start.
// Phase length: P issue cycles, then the pipeline latency of the nodes
// plus one memory read cycle and one state transition.
module decoder_controller #(
  parameter int P        = 167,
  parameter int MAX_ITER = admm_pkg::MAX_ITER_DEFAULT,
  parameter int AW       = $clog2(P),
  parameter int IW       = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          early_term_en,
  input  logic          vn_out_valid,   // one result of the VN pipelines
  input  logic          cn_out_valid,   // one result of the CN pipelines
  input  logic          par_fail,       // unsatisfied check seen this cycle
  output logic          vn_issue,       // read address valid, VN phase
  output logic          cn_issue,       // read address valid, CN phase
  output logic [AW-1:0] rd_addr,
  output logic [AW-1:0] wr_addr,
  output logic          first_iter,
  output logic          busy,
  output logic          done,
  output logic [IW-1:0] iters,
  output logic          early_stop
);
  typedef enum logic [2:0] {
    ST_IDLE, ST_VN_ISSUE, ST_VN_DRAIN, ST_CN_ISSUE, ST_CN_DRAIN
  } state_e;

  state_e        state;
  logic [AW-1:0] cnt;
  logic          fail_seen;
  logic          last_out;

  assign vn_issue = (state == ST_VN_ISSUE);
  assign cn_issue = (state == ST_CN_ISSUE);
  assign rd_addr  = cnt;
  assign busy     = (state != ST_IDLE);
  assign last_out = (wr_addr == AW'(P - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= ST_IDLE;
      cnt        <= '0;
      wr_addr    <= '0;
      fail_seen  <= 1'b0;
      first_iter <= 1'b0;
      done       <= 1'b0;
      iters      <= '0;
      early_stop <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        ST_IDLE: begin
          if (start) begin
            state      <= ST_VN_ISSUE;
            cnt        <= '0;
            wr_addr    <= '0;
            first_iter <= 1'b1;
            iters      <= '0;
            early_stop <= 1'b0;
          end
        end
        ST_VN_ISSUE: begin
          cnt <= cnt + 1'b1;
          if (cnt == AW'(P - 1)) state <= ST_VN_DRAIN;
        end
        ST_CN_ISSUE: begin
          cnt <= cnt + 1'b1;
          if (cnt == AW'(P - 1)) state <= ST_CN_DRAIN;
        end
        default: ;
      endcase

      // results come back while issuing and while draining
      if (state == ST_VN_ISSUE || state == ST_VN_DRAIN) begin
        if (vn_out_valid) begin
          wr_addr <= last_out ? '0 : wr_addr + 1'b1;
          if (last_out) begin
            state     <= ST_CN_ISSUE;
            cnt       <= '0;
            fail_seen <= 1'b0;
          end
        end
      end
      if (state == ST_CN_ISSUE || state == ST_CN_DRAIN) begin
        if (par_fail) fail_seen <= 1'b1;
        if (cn_out_valid) begin
          wr_addr <= last_out ? '0 : wr_addr + 1'b1;
          if (last_out) begin
            iters      <= iters + 1'b1;
            first_iter <= 1'b0;
            cnt        <= '0;
            if ((32'(iters) + 1 >= MAX_ITER) || (early_term_en && !fail_seen && !par_fail)) begin
              state      <= ST_IDLE;
              done       <= 1'b1;
              early_stop <= early_term_en && !fail_seen && !par_fail;
            end else begin
              state <= ST_VN_ISSUE;
            end
          end
        end
      end
    end
  end

  // A result can only come back for an address that was issued.
  property p_no_spurious_vn;
    @(posedge clk) disable iff (!rst_n) vn_out_valid |-> (state == ST_VN_ISSUE || state == ST_VN_DRAIN);
  endproperty
  a_no_spurious_vn: assert property (p_no_spurious_vn);
  property p_no_spurious_cn;
    @(posedge clk) disable iff (!rst_n) cn_out_valid |-> (state == ST_CN_ISSUE || state == ST_CN_DRAIN);
  endproperty
  a_no_spurious_cn: assert property (p_no_spurious_cn);
endmodule
