// pim_l1_cache -- PIM core L1 data cache with LazyPIM speculative state.
//
// A 64 kB, 4-way set-associative, write-back cache with 64 B lines (8 words of
// 64 bits).  Beside the tag, each line has the one-bit speculative flag and a
// per-word dirty mask that LazyPIM adds:
//   * every store during a partial kernel marks its line speculative and sets
//     the dirty bit of the word written;
//   * a miss whose victim would have to be a speculative line is refused and
//     spec_evict is raised, so the core ends the partial kernel and commits;
//   * merge (write-after-write with the processor): the processor's copy of a
//     line arrives and fills every word the PIM core did not write; if the
//     line is not held speculatively it is written on to memory instead, so
//     the processor's data is never lost;
//   * commit: all speculative lines are written back to memory, one per
//     accepted write, and become clean;
//   * rollback: every line is invalidated in one cycle.
// The speculative flag, the dirty mask, the merge, commit write-back and
// rollback are from the paper.  This design's own choices: the replacement
// policy (an invalid way, else the lowest non-speculative way, so a
// speculative line is "selected for eviction" only when all four ways are
// speculative); forwarding a merge for a line that is not speculative to
// memory; and dropping all lines, clean ones included, on rollback (the paper
// names only speculative lines, but a clean line filled by the rolled-back
// partial kernel may hold exactly the stale data that caused the conflict).
// The cache only holds clean or speculative lines: stores happen only inside
// kernels, and every commit writes all speculative lines back.
//
// Interface and timing.  Core port: req_* is held until rsp_valid (one cycle
// after a hit, after the refill on a miss).  rsp_we/rsp_line tell the
// controller which signature to update.  Memory port: line-wide requests with
// valid/ready; a read answers with mem_rsp_valid; writes are posted.
// cmd_commit / cmd_rollback are accepted while idle (busy low); done pulses.
module pim_l1_cache
  import lazypim_pkg::*;
#(
  parameter int unsigned BYTES = L1_BYTES,
  parameter int unsigned WAYS  = L1_WAYS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // core side
  input  logic                  core_en,
  input  logic                  req_valid,
  input  logic                  req_we,
  input  logic [PADDR_W-1:0]    req_addr,
  input  logic [WORD_W-1:0]     req_wdata,
  output logic                  rsp_valid,
  output logic                  rsp_we,
  output line_addr_t            rsp_line,
  output logic [WORD_W-1:0]     rsp_rdata,
  output logic                  spec_evict,
  // LazyPIM commands
  input  logic                  cmd_commit,
  input  logic                  cmd_rollback,
  output logic                  commit_done,
  output logic                  rollback_done,
  output logic                  busy,
  // merge from the processor (WAW)
  input  logic                  merge_valid,
  input  line_addr_t            merge_line,
  input  logic [LINE_BITS-1:0]  merge_data,
  output logic                  merge_ready,
  // memory (vault) side
  output logic                  mem_req_valid,
  output logic                  mem_req_we,
  output line_addr_t            mem_req_line,
  output logic [LINE_BITS-1:0]  mem_req_wdata,
  input  logic                  mem_req_ready,
  input  logic                  mem_rsp_valid,
  input  logic [LINE_BITS-1:0]  mem_rsp_rdata
);
  localparam int unsigned SETS  = BYTES / (LINE_BITS / 8) / WAYS;
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = LINE_W - IDX_W;
  localparam int unsigned LINES = SETS * WAYS;
  localparam int unsigned LN_W  = $clog2(LINES);
  localparam int unsigned WSEL_W = $clog2(WORDS);

  typedef enum logic [2:0] {S_IDLE, S_REFILL_REQ, S_REFILL_WAIT, S_COMMIT, S_MERGE_WB} state_e;
  state_e state;

  logic [TAG_W-1:0]      tag_q   [LINES];
  logic [WORDS-1:0]      dmask_q [LINES];
  logic [LINE_BITS-1:0]  data_q  [LINES];
  logic [LINES-1:0]      valid_q, spec_q;

  // ---- core request decode ----
  line_addr_t         rq_line;
  logic [IDX_W-1:0]   rq_set;
  logic [TAG_W-1:0]   rq_tag;
  logic [WSEL_W-1:0]  rq_word;
  assign rq_line = req_addr[PADDR_W-1:LINE_OFS];
  assign rq_set  = rq_line[IDX_W-1:0];
  assign rq_tag  = rq_line[LINE_W-1:IDX_W];
  assign rq_word = req_addr[LINE_OFS-1:3];

  function automatic logic [LN_W-1:0] li(logic [IDX_W-1:0] s, logic [WAY_W-1:0] w);
    return LN_W'(int'(s) * WAYS + int'(w));
  endfunction

  logic             hit;
  logic [WAY_W-1:0] hit_way, vic_way;
  logic             vic_ok;
  always_comb begin
    hit = 1'b0; hit_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (valid_q[li(rq_set, WAY_W'(w))] && tag_q[li(rq_set, WAY_W'(w))] == rq_tag) begin
        hit = 1'b1; hit_way = WAY_W'(w);
      end
    vic_ok = 1'b0; vic_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (!spec_q[li(rq_set, WAY_W'(w))]) begin vic_ok = 1'b1; vic_way = WAY_W'(w); end
    for (int w = WAYS - 1; w >= 0; w--)
      if (!valid_q[li(rq_set, WAY_W'(w))]) begin vic_ok = 1'b1; vic_way = WAY_W'(w); end
  end

  // ---- merge decode ----
  logic             m_hit;
  logic [WAY_W-1:0] m_way;
  always_comb begin
    m_hit = 1'b0; m_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (valid_q[li(merge_line[IDX_W-1:0], WAY_W'(w))] &&
          tag_q[li(merge_line[IDX_W-1:0], WAY_W'(w))] == merge_line[LINE_W-1:IDX_W]) begin
        m_hit = 1'b1; m_way = WAY_W'(w);
      end
  end

  // ---- commit: first speculative line ----
  logic            any_spec;
  logic [LN_W-1:0] first_spec;
  always_comb begin
    any_spec = |spec_q; first_spec = '0;
    for (int i = LINES - 1; i >= 0; i--) if (spec_q[i]) first_spec = LN_W'(i);
  end

  logic [LN_W-1:0]      fill_li;
  line_addr_t           fill_line;
  line_addr_t           mwb_line;
  logic [LINE_BITS-1:0] mwb_data;

  logic idle_core, idle_merge;
  assign idle_merge  = (state == S_IDLE) && merge_valid && !cmd_commit && !cmd_rollback;
  assign idle_core   = (state == S_IDLE) && !merge_valid && !cmd_commit && !cmd_rollback
                       && core_en && req_valid;
  assign merge_ready = idle_merge;
  assign busy        = (state != S_IDLE);
  assign spec_evict  = idle_core && !hit && !vic_ok;

  always_comb begin
    mem_req_valid = 1'b0; mem_req_we = 1'b0; mem_req_line = '0; mem_req_wdata = '0;
    unique case (state)
      S_REFILL_REQ: begin mem_req_valid = 1'b1; mem_req_line = fill_line; end
      S_COMMIT: if (any_spec) begin
        mem_req_valid = 1'b1; mem_req_we = 1'b1;
        mem_req_line  = {tag_q[first_spec], IDX_W'(int'(first_spec) / WAYS)};
        mem_req_wdata = data_q[first_spec];
      end
      S_MERGE_WB: begin mem_req_valid = 1'b1; mem_req_we = 1'b1;
                        mem_req_line = mwb_line; mem_req_wdata = mwb_data; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      valid_q <= '0; spec_q <= '0;
      rsp_valid <= 1'b0; rsp_we <= 1'b0; rsp_line <= '0; rsp_rdata <= '0;
      commit_done <= 1'b0; rollback_done <= 1'b0;
      fill_li <= '0; fill_line <= '0; mwb_line <= '0; mwb_data <= '0;
    end else begin
      rsp_valid <= 1'b0; commit_done <= 1'b0; rollback_done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (cmd_rollback) begin
            valid_q <= '0; spec_q <= '0;
            rollback_done <= 1'b1;
          end else if (cmd_commit) begin
            state <= S_COMMIT;
          end else if (merge_valid) begin
            if (!(m_hit && spec_q[li(merge_line[IDX_W-1:0], m_way)])) begin
              mwb_line <= merge_line; mwb_data <= merge_data;
              state <= S_MERGE_WB;
            end
          end else if (core_en && req_valid) begin
            if (hit) begin
              rsp_valid <= 1'b1; rsp_we <= req_we; rsp_line <= rq_line;
              rsp_rdata <= data_q[li(rq_set, hit_way)][int'(rq_word)*WORD_W +: WORD_W];
              if (req_we) spec_q[li(rq_set, hit_way)] <= 1'b1;
            end else if (vic_ok) begin
              fill_li   <= li(rq_set, vic_way);
              fill_line <= rq_line;
              valid_q[li(rq_set, vic_way)] <= 1'b0;
              state     <= S_REFILL_REQ;
            end
          end
        end
        S_REFILL_REQ: if (mem_req_ready) state <= S_REFILL_WAIT;
        S_REFILL_WAIT: if (mem_rsp_valid) begin
          valid_q[fill_li] <= 1'b1;
          spec_q[fill_li]  <= 1'b0;
          state <= S_IDLE;      // request is served as a hit next cycle
        end
        S_COMMIT: begin
          if (!any_spec) begin
            commit_done <= 1'b1; state <= S_IDLE;
          end else if (mem_req_ready) spec_q[first_spec] <= 1'b0;
        end
        S_MERGE_WB: if (mem_req_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- tag, data and dirty-mask arrays: no reset, so they stay memories;
  //      valid_q and spec_q say which entries mean anything ----
  logic             in_idle, wr_merge, wr_core, wr_fill, wr_commit;
  logic [LN_W-1:0]  m_li, h_li;
  assign in_idle   = (state == S_IDLE) && !cmd_commit && !cmd_rollback;
  assign m_li      = li(merge_line[IDX_W-1:0], m_way);
  assign h_li      = li(rq_set, hit_way);
  assign wr_merge  = in_idle && merge_valid && m_hit;
  assign wr_core   = in_idle && !merge_valid && core_en && req_valid && hit && req_we;
  assign wr_fill   = (state == S_REFILL_WAIT) && mem_rsp_valid;
  assign wr_commit = (state == S_COMMIT) && any_spec && mem_req_ready;

  always_ff @(posedge clk) begin
    if (wr_merge) begin
      // into a speculative line only the words the PIM core did not write
      for (int w = 0; w < WORDS; w++)
        if (!spec_q[m_li] || !dmask_q[m_li][w])
          data_q[m_li][w*WORD_W +: WORD_W] <= merge_data[w*WORD_W +: WORD_W];
    end
    if (wr_core) begin
      data_q[h_li][int'(rq_word)*WORD_W +: WORD_W] <= req_wdata;
      dmask_q[h_li][rq_word] <= 1'b1;
    end
    if (wr_fill) begin
      data_q[fill_li]  <= mem_rsp_rdata;
      tag_q[fill_li]   <= fill_line[LINE_W-1:IDX_W];
      dmask_q[fill_li] <= '0;
    end
    if (wr_commit) dmask_q[first_spec] <= '0;
  end

  // A rollback or commit is only issued to an idle cache.
  a_one_command: assert property (@(posedge clk) disable iff (!rst_n)
    !(cmd_commit && cmd_rollback));
endmodule
