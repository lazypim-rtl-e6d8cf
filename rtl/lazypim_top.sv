// lazypim_top -- the LazyPIM coherence hardware of a CPU + PIM system.
//
// Memory side (logic layer of the memory stack), per PIM core p:
//   pim_l1_cache  L1 data cache with speculative bits and word dirty masks
//   pim_lazy_ctrl partial-kernel control, PIMReadSet and PIMWriteSet,
//                 speculative read bits, commit / rollback sequencing
// Between the two chips:
//   sig_link      batched transfer of the signatures to the processor
// Processor side:
//   cpu_conflict_ctrl  CPUWriteSet, conflict detection, flush / merge /
//                      invalidate walks, region lock, forward-progress lock
//   pim_dbi            dirty-block index that writes back dirty PIM-region
//                      lines every DBI_INTERVAL cycles
// The parts this hardware plugs into are outside: the PIM cores (memory
// requests, retire, PIM_end, synchronization, checkpoint and restore), the PIM
// directory (who read whose speculative data), the vaults (line reads and
// writes), and the processor's caches (writes to the PIM region, the tag-store
// walk, merge data, write-backs) and directory (region_lock).
// Merge data from the processor reaches PIM core merge_core's L1 directly.
// A processor write to the PIM region must wait while cpu_wr_stall is high;
// it is recorded in CPUWriteSet and in the PIM-DBI when it is not stalled.
module lazypim_top
  import lazypim_pkg::*;
#(
  parameter int unsigned P            = NPIM,
  parameter int unsigned N            = SIG_BITS,
  parameter int unsigned M            = SIG_M,
  parameter int unsigned REGS         = CWS_REGS,
  parameter int unsigned MAX_ADDRS    = SIG_MAX_ADDRS,
  parameter int unsigned INSN_MAX     = INSN_LIMIT,
  parameter int unsigned L1B          = L1_BYTES,
  parameter int unsigned LINK_W       = 64,
  parameter int unsigned DBI_PERIOD   = DBI_INTERVAL
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // ---- PIM cores ----
  input  logic [P-1:0]                launch,
  input  logic [P-1:0]                retire,
  input  logic [P-1:0]                sync_prim,
  input  logic [P-1:0]                kernel_end,
  output logic [P-1:0]                core_run,
  output logic [P-1:0]                core_checkpoint,
  output logic [P-1:0]                core_restore,
  output logic [P-1:0]                kernel_done,
  input  logic [P-1:0]                req_valid,
  input  logic [P-1:0]                req_we,
  input  logic [P-1:0][PADDR_W-1:0]   req_addr,
  input  logic [P-1:0][WORD_W-1:0]    req_wdata,
  output logic [P-1:0]                rsp_valid,
  output logic [P-1:0][WORD_W-1:0]    rsp_rdata,
  // ---- PIM directory ----
  input  logic [P-1:0][P-1:0]         spec_read_src,
  // ---- vaults ----
  output logic [P-1:0]                mem_req_valid,
  output logic [P-1:0]                mem_req_we,
  output line_addr_t [P-1:0]          mem_req_line,
  output logic [P-1:0][LINE_BITS-1:0] mem_req_wdata,
  input  logic [P-1:0]                mem_req_ready,
  input  logic [P-1:0]                mem_rsp_valid,
  input  logic [P-1:0][LINE_BITS-1:0] mem_rsp_rdata,
  // ---- processor ----
  input  logic                        cpu_wr_valid,
  input  line_addr_t                  cpu_wr_line,
  output logic                        cpu_wr_stall,
  input  logic                        cpu_clean_valid,
  input  line_addr_t                  cpu_clean_line,
  output logic                        walk_start,
  output walk_e                       walk_cmd,
  input  logic                        walk_line_valid,
  input  line_addr_t                  walk_line,
  input  logic                        walk_dirty,
  input  logic                        walk_done,
  output logic                        act_flush,
  output logic                        act_inv,
  output logic                        act_merge,
  output logic [$clog2(P)-1:0]        act_merge_core,
  input  logic                        merge_valid,
  input  logic [$clog2(P)-1:0]        merge_core,
  input  line_addr_t                  merge_line,
  input  logic [LINE_BITS-1:0]        merge_data,
  output logic                        merge_ready,
  output logic                        dbi_wb_valid,
  output line_addr_t                  dbi_wb_line,
  input  logic                        dbi_wb_ready,
  output logic                        region_lock,
  // ---- observation ----
  output logic                        link_valid,
  output logic [P-1:0][4:0]           stop_cause,
  output logic [P-1:0][31:0]          n_partial_commits,
  output logic [P-1:0][31:0]          n_rollbacks,
  output logic [31:0]                 n_commit_groups,
  output logic [31:0]                 n_rollback_groups,
  output logic [31:0]                 n_shared_groups,
  output logic [31:0]                 n_locks,
  output logic [31:0]                 n_waw,
  output logic [31:0]                 n_dbi_triggers,
  output logic [31:0]                 n_dbi_evictions
);
  logic [P-1:0]        waiting, squashed, commit_ack, tx_valid, tx_ready, rx_valid, rx_release;
  logic [P-1:0][N-1:0] tx_prs, tx_pws, rx_prs, rx_pws;
  logic [P-1:0][P-1:0] tx_rb, rx_rb;
  logic [P-1:0]        commit_mask, rollback_mask, l1_merge_ready;
  logic [LINK_W-1:0]   link_data_unused;

  for (genvar p = 0; p < P; p++) begin : g_pim
    logic       l1_rsp_we, l1_spec_evict, l1_busy, l1_cdone, l1_rdone, l1_cc, l1_cr;
    line_addr_t l1_rsp_line;

    pim_l1_cache #(.BYTES(L1B)) u_l1 (
      .clk, .rst_n,
      .core_en(core_run[p]), .req_valid(req_valid[p]), .req_we(req_we[p]),
      .req_addr(req_addr[p]), .req_wdata(req_wdata[p]),
      .rsp_valid(rsp_valid[p]), .rsp_we(l1_rsp_we), .rsp_line(l1_rsp_line),
      .rsp_rdata(rsp_rdata[p]), .spec_evict(l1_spec_evict),
      .cmd_commit(l1_cc), .cmd_rollback(l1_cr),
      .commit_done(l1_cdone), .rollback_done(l1_rdone), .busy(l1_busy),
      .merge_valid(merge_valid && int'(merge_core) == p), .merge_line, .merge_data,
      .merge_ready(l1_merge_ready[p]),
      .mem_req_valid(mem_req_valid[p]), .mem_req_we(mem_req_we[p]),
      .mem_req_line(mem_req_line[p]), .mem_req_wdata(mem_req_wdata[p]),
      .mem_req_ready(mem_req_ready[p]), .mem_rsp_valid(mem_rsp_valid[p]),
      .mem_rsp_rdata(mem_rsp_rdata[p]));

    pim_lazy_ctrl #(.P(P), .ID(p), .N(N), .M(M), .MAX_ADDRS(MAX_ADDRS), .INSN_MAX(INSN_MAX)) u_ctrl (
      .clk, .rst_n,
      .launch(launch[p]), .retire(retire[p]), .sync_prim(sync_prim[p]), .kernel_end(kernel_end[p]),
      .core_run(core_run[p]), .core_checkpoint(core_checkpoint[p]),
      .core_restore(core_restore[p]), .kernel_done(kernel_done[p]),
      .l1_rsp_valid(rsp_valid[p]), .l1_rsp_we, .l1_rsp_line, .l1_spec_evict, .l1_busy,
      .l1_commit_done(l1_cdone), .l1_rollback_done(l1_rdone),
      .l1_cmd_commit(l1_cc), .l1_cmd_rollback(l1_cr),
      .spec_read_src(spec_read_src[p]), .peer_waiting(waiting), .waiting(waiting[p]),
      .tx_valid(tx_valid[p]), .tx_prs(tx_prs[p]), .tx_pws(tx_pws[p]), .tx_rb(tx_rb[p]),
      .tx_ready(tx_ready[p]),
      .commit_mask, .rollback_mask, .squashed(squashed[p]), .commit_ack(commit_ack[p]),
      .stop_cause(stop_cause[p]), .n_partial_commits(n_partial_commits[p]),
      .n_rollbacks(n_rollbacks[p]));
  end

  assign merge_ready = l1_merge_ready[merge_core];

  sig_link #(.P(P), .N(N), .LINK_W(LINK_W)) u_link (
    .clk, .rst_n, .tx_valid, .tx_prs, .tx_pws, .tx_rb, .tx_ready,
    .link_valid, .link_data(link_data_unused),
    .rx_valid, .rx_prs, .rx_pws, .rx_rb, .rx_release);

  logic cc_stall, dbi_stall, dbi_flushing_unused;
  // a source core is not resolved alone while a core that read its data
  // has a message on its way
  logic [P-1:0] src_hold;
  always_comb begin
    src_hold = '0;
    for (int q = 0; q < P; q++)
      if (waiting[q] && !rx_valid[q]) src_hold |= tx_rb[q];
  end

  cpu_conflict_ctrl #(.P(P), .N(N), .M(M), .REGS(REGS)) u_cc (
    .clk, .rst_n, .rx_valid, .rx_prs, .rx_pws, .rx_rb, .rx_release,
    .squashed, .commit_ack, .launch(|launch), .src_hold,
    .commit_mask, .rollback_mask,
    .cpu_wr_valid, .cpu_wr_line, .cpu_wr_stall(cc_stall), .cpu_wr_hold(dbi_stall),
    .walk_start, .walk_cmd, .walk_line_valid, .walk_line, .walk_dirty, .walk_done,
    .act_flush, .act_inv, .act_merge, .act_merge_core, .region_lock,
    .n_commit_groups, .n_rollback_groups, .n_shared_groups, .n_locks, .n_waw);

  pim_dbi #(.INTERVAL(DBI_PERIOD)) u_dbi (
    .clk, .rst_n,
    .mark_valid(cpu_wr_valid && !cc_stall), .mark_line(cpu_wr_line), .mark_stall(dbi_stall),
    .clean_valid(cpu_clean_valid), .clean_line(cpu_clean_line),
    .wb_valid(dbi_wb_valid), .wb_line(dbi_wb_line), .wb_ready(dbi_wb_ready),
    .flushing(dbi_flushing_unused), .n_triggers(n_dbi_triggers), .n_row_evictions(n_dbi_evictions));

  assign cpu_wr_stall = cpu_wr_valid && (cc_stall || dbi_stall);
endmodule
