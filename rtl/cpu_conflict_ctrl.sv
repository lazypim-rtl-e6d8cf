// cpu_conflict_ctrl -- processor-side LazyPIM conflict detection and resolution.
//
// Holds the CPUWriteSet (cpu_write_set) and the conflict-detection hardware
// (two sig_intersect units) and serves the signature messages that arrive
// from the PIM cores, one group at a time:
//  1. Pick.  A group is a waiting core p plus every core whose speculative
//     data p read (its speculative read bits); all of them must be waiting.
//     Groups that share data go first, then the lowest core number.
//  2. Check, one member per cycle.  Conflict if PIMReadSet AND any CPUWriteSet
//     register is non-empty in all segments, or if the member was squashed
//     (it read data of a core that has since rolled back).  The PIMWriteSet is
//     intersected too, to know whether a WAW merge may be needed.
//  3. With the PIM data region locked (region_lock), one walk of the processor
//     cache tag store.  On a conflict (WALK_FLUSH): flush every dirty line
//     whose address is in a member's PIMReadSet; then answer rollback.  With no
//     conflict (WALK_COMMIT): a dirty line in a member's PIMWriteSet is sent to
//     that core for merging and invalidated, a clean one only invalidated; then
//     answer commit and wait for every member's commit_ack (its speculative
//     lines are in DRAM).
//  4. Erase CPUWriteSet and rescan the tag store (WALK_SCAN): every dirty line
//     of the PIM data region goes back into CPUWriteSet, as the next partial
//     kernel starts.  A kernel launch (launch) also triggers a scan.
// Sharing bookkeeping: once a core has been resolved, its bit in messages
// sent before that (stale) no longer holds a group back; and a source core is
// not picked alone while a message that names it is on its way (src_hold).
// Forward progress: a core rolled back ROLLBACK_LIMIT times in a row gets its
// PIMReadSet locked; a processor write to a line in a locked read set stalls
// until that core commits.  During resolution, a processor write stalls only
// if its line is in a signature of the group being resolved.
// Steps 2-4, the lock after three rollbacks and the locking of the region
// follow the paper.  This design's own choices: the tag-store walk interface
// (the cache presents one line per cycle and this block answers with the
// action), the group rule, the squashed input, the priority order, and
// stalling a processor write in the cycle a scan line is inserted.
//
// Walk interface: walk_start pulses with walk_cmd; then each cycle with
// walk_line_valid the cache shows a PIM-region line and whether it is dirty;
// act_* answer combinationally in the same cycle; walk_done ends the walk.
module cpu_conflict_ctrl
  import lazypim_pkg::*;
#(
  parameter int unsigned P        = NPIM,
  parameter int unsigned N        = SIG_BITS,
  parameter int unsigned M        = SIG_M,
  parameter int unsigned REGS     = CWS_REGS,
  parameter int unsigned RB_LIMIT = ROLLBACK_LIMIT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // signature messages (sig_link receive buffers)
  input  logic [P-1:0]          rx_valid,
  input  logic [P-1:0][N-1:0]   rx_prs,
  input  logic [P-1:0][N-1:0]   rx_pws,
  input  logic [P-1:0][P-1:0]   rx_rb,
  output logic [P-1:0]          rx_release,
  input  logic [P-1:0]          squashed,
  input  logic [P-1:0]          commit_ack,
  input  logic                  launch,
  input  logic [P-1:0]          src_hold,         // a message naming this core as source is on its way
  // answers to the PIM cores
  output logic [P-1:0]          commit_mask,
  output logic [P-1:0]          rollback_mask,
  // processor writes to the PIM data region
  input  logic                  cpu_wr_valid,
  input  line_addr_t            cpu_wr_line,
  output logic                  cpu_wr_stall,
  input  logic                  cpu_wr_hold,      // write held elsewhere (PIM-DBI)
  // processor cache tag-store walk
  output logic                  walk_start,
  output walk_e                 walk_cmd,
  input  logic                  walk_line_valid,
  input  line_addr_t            walk_line,
  input  logic                  walk_dirty,
  input  logic                  walk_done,
  output logic                  act_flush,
  output logic                  act_inv,
  output logic                  act_merge,
  output logic [$clog2(P)-1:0]  act_merge_core,
  // directory lock of the PIM data region
  output logic                  region_lock,
  // statistics
  output logic [31:0]           n_commit_groups,
  output logic [31:0]           n_rollback_groups,
  output logic [31:0]           n_shared_groups,
  output logic [31:0]           n_locks,
  output logic [31:0]           n_waw
);
  localparam int unsigned SEG    = N / M;
  localparam int unsigned HASH_W = $clog2(SEG);
  localparam int unsigned PID_W  = $clog2(P);
  localparam int unsigned RBC_W  = $clog2(RB_LIMIT + 1);

  typedef enum logic [2:0] {X_IDLE, X_CHECK, X_WALK_START, X_WALK, X_WAIT_ACK,
                            X_SCAN_START, X_SCAN} xstate_e;
  xstate_e state;

  logic [P-1:0]         grp, acks, waw;
  logic                 conflict, scan_pending;
  logic [PID_W-1:0]     k;
  logic [P-1:0][RBC_W-1:0] rb_cnt;
  logic [P-1:0]         lock_valid;
  logic [P-1:0][P-1:0]  stale;          // source bits of messages sent before that source was resolved
  logic [P-1:0][P-1:0]  eff_rb;
  logic [N-1:0]         lock_sig [P];

  // ---- CPUWriteSet ----
  logic              cws_clr, cws_ins, cws_hit_unused;
  line_addr_t        cws_addr;
  logic [REGS-1:0][N-1:0] cws;
  logic [$clog2(REGS+1)-1:0] cws_rr_unused;
  cpu_write_set #(.N(N), .M(M), .REGS(REGS)) u_cws (
    .clk, .rst_n, .clr(cws_clr), .ins(cws_ins), .ins_addr(cws_addr),
    .test_addr(cpu_wr_line), .test_hit(cws_hit_unused), .regs(cws), .rr_ptr_o(cws_rr_unused));

  // ---- conflict detection hardware ----
  logic rd_hit, wr_hit;
  logic [REGS-1:0] rd_reg_unused, wr_reg_unused;
  sig_intersect #(.N(N), .M(M), .REGS(REGS)) u_rd (.pim_sig(rx_prs[k]), .cws, .reg_hit(rd_reg_unused), .hit(rd_hit));
  sig_intersect #(.N(N), .M(M), .REGS(REGS)) u_wr (.pim_sig(rx_pws[k]), .cws, .reg_hit(wr_reg_unused), .hit(wr_hit));

  // ---- membership of the walked line and of the processor write ----
  logic [M-1:0][HASH_W-1:0] w_idx, c_idx;
  h3_hash #(.ADDR_W(LINE_W), .M(M), .HASH_W(HASH_W)) u_hw (.addr(walk_line),   .idx(w_idx));
  h3_hash #(.ADDR_W(LINE_W), .M(M), .HASH_W(HASH_W)) u_hc (.addr(cpu_wr_line), .idx(c_idx));

  logic [N-1:0] w_mask, c_mask;          // one-hot per segment
  logic [P-1:0] w_in_prs, w_in_pws, c_in_prs, c_in_pws, c_in_lock;
  always_comb begin
    for (int s = 0; s < M; s++) begin
      w_mask[s*SEG +: SEG] = SEG'(1) << w_idx[s];
      c_mask[s*SEG +: SEG] = SEG'(1) << c_idx[s];
    end
    for (int p = 0; p < P; p++) begin
      w_in_prs[p] = 1'b1; w_in_pws[p] = 1'b1;
      c_in_prs[p] = 1'b1; c_in_pws[p] = 1'b1; c_in_lock[p] = 1'b1;
      for (int s = 0; s < M; s++) begin
        w_in_prs[p]  &= |(rx_prs[p][s*SEG +: SEG]   & w_mask[s*SEG +: SEG]);
        w_in_pws[p]  &= |(rx_pws[p][s*SEG +: SEG]   & w_mask[s*SEG +: SEG]);
        c_in_prs[p]  &= |(rx_prs[p][s*SEG +: SEG]   & c_mask[s*SEG +: SEG]);
        c_in_pws[p]  &= |(rx_pws[p][s*SEG +: SEG]   & c_mask[s*SEG +: SEG]);
        c_in_lock[p] &= |(lock_sig[p][s*SEG +: SEG] & c_mask[s*SEG +: SEG]);
      end
    end
  end

  // ---- group selection ----
  logic             pick_ok;
  logic [PID_W-1:0] pick;
  always_comb begin
    for (int p = 0; p < P; p++) eff_rb[p] = rx_rb[p] & ~stale[p];
    pick_ok = 1'b0; pick = '0;
    for (int p = P - 1; p >= 0; p--)
      if (rx_valid[p] && !src_hold[p] && ((eff_rb[p] & ~rx_valid) == '0)) begin pick_ok = 1'b1; pick = PID_W'(p); end
    for (int p = P - 1; p >= 0; p--)
      if (rx_valid[p] && (eff_rb[p] != '0) && ((eff_rb[p] & ~rx_valid) == '0)) begin
        pick_ok = 1'b1; pick = PID_W'(p);
      end
  end

  // ---- walk actions ----
  logic scan_ins;
  always_comb begin
    act_flush = 1'b0; act_inv = 1'b0; act_merge = 1'b0; act_merge_core = '0;
    scan_ins  = 1'b0;
    if (walk_line_valid) begin
      unique case (walk_cmd)
        WALK_FLUSH:  act_flush = walk_dirty && |(w_in_prs & grp);
        WALK_COMMIT: if (|(w_in_pws & grp)) begin
          act_inv   = 1'b1;
          act_merge = walk_dirty;
          for (int p = P - 1; p >= 0; p--) if (w_in_pws[p] && grp[p]) act_merge_core = PID_W'(p);
        end
        WALK_SCAN:   scan_ins = (state == X_SCAN) && walk_dirty;
        default: ;
      endcase
    end
  end

  // ---- processor writes ----
  logic grp_touch;
  assign grp_touch    = region_lock && |((c_in_prs | c_in_pws) & grp);
  assign cpu_wr_stall = cpu_wr_valid && (grp_touch || |(c_in_lock & lock_valid) || scan_ins);
  assign cws_ins      = scan_ins || (cpu_wr_valid && !cpu_wr_stall && !cpu_wr_hold);
  assign cws_addr     = scan_ins ? walk_line : cpu_wr_line;

  always_comb begin
    cws_clr = 1'b0;
    if (state == X_SCAN_START) cws_clr = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= X_IDLE; grp <= '0; acks <= '0; waw <= '0; conflict <= 1'b0;
      scan_pending <= 1'b0; k <= '0; rb_cnt <= '0; lock_valid <= '0; stale <= '0;
      for (int p = 0; p < P; p++) lock_sig[p] <= '0;
      rx_release <= '0; commit_mask <= '0; rollback_mask <= '0;
      walk_start <= 1'b0; walk_cmd <= WALK_SCAN; region_lock <= 1'b0;
      n_commit_groups <= '0; n_rollback_groups <= '0; n_shared_groups <= '0;
      n_locks <= '0; n_waw <= '0;
    end else begin
      rx_release <= '0; commit_mask <= '0; rollback_mask <= '0; walk_start <= 1'b0;
      // a released message's stale bits go with it; a resolved group's
      // members become stale sources for every message still to come
      for (int p = 0; p < P; p++) if (rx_release[p]) stale[p] <= '0;
      if (state == X_SCAN_START) for (int p = 0; p < P; p++) if (!grp[p]) stale[p] <= stale[p] | grp;
      if (launch) scan_pending <= 1'b1;
      unique case (state)
        X_IDLE: begin
          if (scan_pending) state <= X_SCAN_START;
          else if (pick_ok) begin
            grp      <= eff_rb[pick] | (P'(1) << pick);
            if (eff_rb[pick] != '0) n_shared_groups <= n_shared_groups + 1;
            conflict <= 1'b0; waw <= '0; k <= '0;
            state    <= X_CHECK;
          end
        end
        X_CHECK: begin
          if (grp[k]) begin
            if (rd_hit || squashed[k]) conflict <= 1'b1;
            if (wr_hit) waw[k] <= 1'b1;
          end
          if (int'(k) == P - 1) state <= X_WALK_START;
          k <= k + 1'b1;
        end
        X_WALK_START: begin
          region_lock <= 1'b1;
          walk_cmd    <= conflict ? WALK_FLUSH : WALK_COMMIT;
          walk_start  <= 1'b1;
          if (!conflict && waw != '0) n_waw <= n_waw + 1;
          state       <= X_WALK;
        end
        X_WALK: if (walk_done) begin
          if (conflict) begin
            rollback_mask <= grp;
            rx_release    <= grp;
            region_lock   <= 1'b0;
            n_rollback_groups <= n_rollback_groups + 1;
            for (int p = 0; p < P; p++) if (grp[p]) begin
              if (int'(rb_cnt[p]) + 1 >= RB_LIMIT) begin
                if (!lock_valid[p]) n_locks <= n_locks + 1;
                lock_valid[p] <= 1'b1;
                lock_sig[p]   <= lock_valid[p] ? (lock_sig[p] | rx_prs[p]) : rx_prs[p];
                rb_cnt[p]     <= RBC_W'(RB_LIMIT);
              end else rb_cnt[p] <= rb_cnt[p] + 1'b1;
            end
            state <= X_SCAN_START;
          end else begin
            commit_mask <= grp;
            acks        <= '0;
            state       <= X_WAIT_ACK;
          end
        end
        X_WAIT_ACK: begin
          acks <= acks | commit_ack;
          if (((acks | commit_ack) & grp) == grp) begin
            region_lock <= 1'b0;
            rx_release  <= grp;
            n_commit_groups <= n_commit_groups + 1;
            for (int p = 0; p < P; p++) if (grp[p]) begin
              rb_cnt[p] <= '0; lock_valid[p] <= 1'b0;
            end
            state <= X_SCAN_START;
          end
        end
        X_SCAN_START: begin          // erase CPUWriteSet, rescan the tag store
          grp <= '0;
          walk_cmd <= WALK_SCAN; walk_start <= 1'b1; scan_pending <= 1'b0;
          state <= X_SCAN;
        end
        X_SCAN: if (walk_done) state <= X_IDLE;
        default: state <= X_IDLE;
      endcase
    end
  end

  a_answer_waiting_only: assert property (@(posedge clk) disable iff (!rst_n)
    ((commit_mask | rollback_mask) & ~rx_valid) == '0);
endmodule
