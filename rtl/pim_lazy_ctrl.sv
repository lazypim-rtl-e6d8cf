// pim_lazy_ctrl -- PIM-side LazyPIM controller, one per PIM core.
//
// Runs a kernel as a sequence of speculative partial kernels.  At the start of
// each partial kernel it asks the core to checkpoint (core_checkpoint).  While
// the partial kernel runs, every load the L1 completes is inserted in the
// PIMReadSet and every store in the PIMWriteSet (both are bloom_signature
// instances), and partial_kernel_ctrl watches for the end conditions.  When
// the partial kernel stops, the controller waits until every PIM core whose
// speculative data this core read has also stopped, then hands PIMReadSet,
// PIMWriteSet and its speculative read bits to the off-chip link and waits for
// the processor's answer:
//   commit   -> the L1 writes its speculative lines back; commit_ack; the
//               next partial kernel starts (or the kernel ends: kernel_done);
//   rollback -> the L1 drops its lines, the core restores its checkpoint
//               (core_restore) and the partial kernel starts again.
// Speculative read bits: spec_read_src[j] (from the PIM directory) marks that
// this core read data that core j wrote speculatively.  Bit j clears when core
// j commits (commit_mask), since the data is then no longer speculative.  If
// core j rolls back (rollback_mask) while the bit is set, this core must roll
// back too: it does so at once while still running, or raises squashed so the
// processor rolls it back when its request is served.
// All of this follows the paper except: the squashed flag, the local rollback
// while running, storing the bits as an NPIM-bit vector with the own bit held
// at 0 (the paper counts P-1 bits), and which of the core's accesses count
// (a completed load is a read, a completed store a write).
//
// Timing: one state per cycle at most; resp pulses are single-cycle.
module pim_lazy_ctrl
  import lazypim_pkg::*;
#(
  parameter int unsigned P         = NPIM,
  parameter int unsigned ID        = 0,
  parameter int unsigned N         = SIG_BITS,
  parameter int unsigned M         = SIG_M,
  parameter int unsigned MAX_ADDRS = SIG_MAX_ADDRS,
  parameter int unsigned INSN_MAX  = INSN_LIMIT
) (
  input  logic             clk,
  input  logic             rst_n,
  // PIM core
  input  logic             launch,
  input  logic             retire,
  input  logic             sync_prim,
  input  logic             kernel_end,
  output logic             core_run,
  output logic             core_checkpoint,
  output logic             core_restore,
  output logic             kernel_done,
  // L1 cache
  input  logic             l1_rsp_valid,
  input  logic             l1_rsp_we,
  input  line_addr_t       l1_rsp_line,
  input  logic             l1_spec_evict,
  input  logic             l1_busy,
  input  logic             l1_commit_done,
  input  logic             l1_rollback_done,
  output logic             l1_cmd_commit,
  output logic             l1_cmd_rollback,
  // PIM directory
  input  logic [P-1:0]     spec_read_src,
  // other PIM controllers
  input  logic [P-1:0]     peer_waiting,
  output logic             waiting,
  // signature link
  output logic             tx_valid,
  output logic [N-1:0]     tx_prs,
  output logic [N-1:0]     tx_pws,
  output logic [P-1:0]     tx_rb,
  input  logic             tx_ready,
  // processor answers
  input  logic [P-1:0]     commit_mask,
  input  logic [P-1:0]     rollback_mask,
  output logic             squashed,
  output logic             commit_ack,
  // statistics
  output logic [4:0]       stop_cause,
  output logic [31:0]      n_partial_commits,
  output logic [31:0]      n_rollbacks
);
  typedef enum logic [2:0] {C_IDLE, C_RUN, C_WAIT_SRC, C_SEND, C_WAIT_RESP,
                            C_COMMIT, C_ROLLBACK} cstate_e;
  cstate_e state;

  logic [P-1:0] rb;
  logic         end_kernel, rb_issued, cm_issued, sig_clr, pk_restart, pk_stop;
  logic         rs_full, ws_full, rs_hit_unused, ws_hit_unused;
  logic [7:0]   rs_cnt, ws_cnt;
  logic [19:0]  insn_cnt;
  logic         squash_now;

  assign squash_now = |(rollback_mask & rb);
  assign core_run   = (state == C_RUN);
  assign waiting    = (state == C_SEND) || (state == C_WAIT_RESP);
  assign tx_valid   = (state == C_SEND);
  assign tx_rb      = rb;

  bloom_signature #(.N(N), .M(M), .MAX_ADDRS(MAX_ADDRS)) u_prs (
    .clk, .rst_n, .clr(sig_clr),
    .ins(l1_rsp_valid && !l1_rsp_we), .ins_addr(l1_rsp_line),
    .test_addr(l1_rsp_line), .test_hit(rs_hit_unused),
    .sig(tx_prs), .count(rs_cnt), .full(rs_full));

  bloom_signature #(.N(N), .M(M), .MAX_ADDRS(MAX_ADDRS)) u_pws (
    .clk, .rst_n, .clr(sig_clr),
    .ins(l1_rsp_valid && l1_rsp_we), .ins_addr(l1_rsp_line),
    .test_addr(l1_rsp_line), .test_hit(ws_hit_unused),
    .sig(tx_pws), .count(ws_cnt), .full(ws_full));

  partial_kernel_ctrl #(.INSN_MAX(INSN_MAX)) u_pk (
    .clk, .rst_n, .run(state == C_RUN), .restart(pk_restart), .retire,
    .rs_full, .ws_full, .spec_evict(l1_spec_evict), .sync_prim, .kernel_end,
    .stop(pk_stop), .cause(stop_cause), .insn_count(insn_cnt));

  always_comb begin
    sig_clr = 1'b0; pk_restart = 1'b0;
    l1_cmd_commit = 1'b0; l1_cmd_rollback = 1'b0;
    unique case (state)
      C_IDLE:      if (launch) begin sig_clr = 1'b1; pk_restart = 1'b1; end
      C_COMMIT: begin
        if (!cm_issued && !l1_busy) l1_cmd_commit = 1'b1;
        if (l1_commit_done) begin sig_clr = 1'b1; pk_restart = 1'b1; end
      end
      C_ROLLBACK: begin
        if (!rb_issued && !l1_busy) l1_cmd_rollback = 1'b1;
        if (l1_rollback_done) begin sig_clr = 1'b1; pk_restart = 1'b1; end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; rb <= '0; end_kernel <= 1'b0; rb_issued <= 1'b0; cm_issued <= 1'b0;
      squashed <= 1'b0; core_checkpoint <= 1'b0; core_restore <= 1'b0;
      kernel_done <= 1'b0; commit_ack <= 1'b0;
      n_partial_commits <= '0; n_rollbacks <= '0;
    end else begin
      core_checkpoint <= 1'b0; core_restore <= 1'b0;
      kernel_done <= 1'b0; commit_ack <= 1'b0;
      // speculative read bits
      begin
        logic [P-1:0] nrb;
        nrb = (rb | spec_read_src) & ~commit_mask;
        nrb[ID] = 1'b0;
        rb <= nrb;
      end
      unique case (state)
        C_IDLE: if (launch) begin
          state <= C_RUN; core_checkpoint <= 1'b1; end_kernel <= 1'b0;
        end
        C_RUN: begin
          if (squash_now) begin
            state <= C_ROLLBACK; rb_issued <= 1'b0;
          end else if (pk_stop) begin
            end_kernel <= kernel_end;
            state <= C_WAIT_SRC;
          end
        end
        C_WAIT_SRC: begin
          if (squash_now) begin
            state <= C_ROLLBACK; rb_issued <= 1'b0;
          end else if (!l1_busy && ((rb & ~peer_waiting) == '0)) state <= C_SEND;
        end
        C_SEND: begin
          if (squash_now) squashed <= 1'b1;
          if (tx_ready) state <= C_WAIT_RESP;
        end
        C_WAIT_RESP: begin
          if (squash_now) squashed <= 1'b1;
          if (rollback_mask[ID]) begin
            state <= C_ROLLBACK; rb_issued <= 1'b0;
          end else if (commit_mask[ID]) begin
            state <= C_COMMIT; cm_issued <= 1'b0;
          end
        end
        C_COMMIT: begin
          if (l1_cmd_commit) cm_issued <= 1'b1;
          if (l1_commit_done) begin
          commit_ack <= 1'b1;
          n_partial_commits <= n_partial_commits + 1;
          rb <= '0; squashed <= 1'b0;
          if (end_kernel) begin state <= C_IDLE; kernel_done <= 1'b1; end
          else begin state <= C_RUN; core_checkpoint <= 1'b1; end
          end
        end
        C_ROLLBACK: begin
          if (l1_cmd_rollback) rb_issued <= 1'b1;
          if (l1_rollback_done) begin
            n_rollbacks <= n_rollbacks + 1;
            rb <= '0; squashed <= 1'b0; end_kernel <= 1'b0;
            core_restore <= 1'b1;
            state <= C_RUN;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // the processor only answers a core that has sent its signatures
  a_commit_only_when_waiting: assert property (@(posedge clk) disable iff (!rst_n)
    commit_mask[ID] |-> state == C_WAIT_RESP);
endmodule
