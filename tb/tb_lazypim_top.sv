// tb_lazypim_top -- end-to-end test of the whole LazyPIM path at the default
// sizes (16 PIM cores, 64 kB L1 each, 2 Kbit signatures, 16-register
// CPUWriteSet, 250-address and 1M-instruction partial-kernel limits, PIM-DBI
// every 800K cycles).  Around the design the testbench models what is not
// built: the PIM cores (a small program per core of loads, stores, waits,
// retired-instruction runs, sync primitives and kernel end, restarted from the
// checkpoint on rollback), the vaults (one shared memory, reads answered after
// 3 cycles), the processor cache (tag store and line data, walked one line per
// cycle on request, doing the flush / invalidate / merge the design answers)
// and the PIM directory (speculative-read notifications).
// Scenarios: the example of a conflict (processor writes A before and C
// during a kernel that reads C and A and writes B: flush, rollback, re-run),
// a WAW line merged word by word on commit, a read set filling up, a
// speculative-line eviction, the instruction cap, a sync primitive, two cores
// sharing speculative data committed as one group, a core squashed by another
// core's rollback, the read-set lock after three rollbacks, PIM-DBI row
// eviction and its periodic write-back.  Each mechanism is counted; one that
// never happens is a failure.
module tb_lazypim_top;
  import lazypim_pkg::*;
  localparam int unsigned P = NPIM;
  localparam int unsigned PW = $clog2(P);
  typedef logic [LINE_BITS-1:0] line_t;
  typedef enum int {LD, ST, WT, RET, SYN, ENDK} opk_e;
  typedef struct { opk_e k; longint unsigned line; int w; longint unsigned d; int n; } op_t;

  logic clk = 0, rst_n = 0;
  logic [P-1:0] launch = '0, retire = '0, sync_prim = '0, kernel_end = '0;
  logic [P-1:0] core_run, core_checkpoint, core_restore, kernel_done;
  logic [P-1:0] req_valid = '0, req_we = '0, rsp_valid;
  logic [P-1:0][PADDR_W-1:0] req_addr = '0;
  logic [P-1:0][WORD_W-1:0] req_wdata = '0, rsp_rdata;
  logic [P-1:0][P-1:0] spec_read_src = '0;
  logic [P-1:0] mem_req_valid, mem_req_we, mem_req_ready, mem_rsp_valid;
  line_addr_t [P-1:0] mem_req_line;
  logic [P-1:0][LINE_BITS-1:0] mem_req_wdata, mem_rsp_rdata;
  logic cpu_wr_valid = 0, cpu_wr_stall, cpu_clean_valid;
  line_addr_t cpu_wr_line = '0, cpu_clean_line, walk_line = '0, merge_line = '0, dbi_wb_line;
  logic walk_start, walk_line_valid = 0, walk_dirty = 0, walk_done = 0;
  walk_e walk_cmd;
  logic act_flush, act_inv, act_merge, merge_valid = 0, merge_ready;
  logic [PW-1:0] act_merge_core, merge_core = '0;
  logic [LINE_BITS-1:0] merge_data = '0;
  logic dbi_wb_valid, dbi_wb_ready = 1, region_lock, link_valid;
  logic [P-1:0][4:0] stop_cause;
  logic [P-1:0][31:0] n_partial_commits, n_rollbacks;
  logic [31:0] n_commit_groups, n_rollback_groups, n_shared_groups, n_locks, n_waw,
               n_dbi_triggers, n_dbi_evictions;

  lazypim_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;
  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // ---------------- vaults ----------------
  line_t vault [longint unsigned];
  function automatic line_t vread(longint unsigned l);
    return vault.exists(l) ? vault[l] : line_t'(0);
  endfunction
  assign mem_req_ready = '1;
  int rsp_cnt [P];
  line_t rsp_buf [P];
  always @(posedge clk) for (int p = 0; p < P; p++) begin
    mem_rsp_valid[p] <= 1'b0;
    if (rsp_cnt[p] > 0) begin
      rsp_cnt[p]--;
      if (rsp_cnt[p] == 0) begin mem_rsp_valid[p] <= 1'b1; mem_rsp_rdata[p] <= rsp_buf[p]; end
    end
    if (rst_n && mem_req_valid[p]) begin
      if (mem_req_we[p]) vault[mem_req_line[p]] = mem_req_wdata[p];
      else if (rsp_cnt[p] == 0) begin rsp_cnt[p] = 3; rsp_buf[p] = vread(mem_req_line[p]); end
    end
  end
  initial for (int p = 0; p < P; p++) rsp_cnt[p] = 0;

  // ---------------- processor cache ----------------
  bit    pdirty [longint unsigned];
  line_t pdata  [longint unsigned];
  longint unsigned wq[$];
  longint unsigned mq_line[$]; int mq_core[$];
  bit walking = 0; longint unsigned wcur;
  assign cpu_clean_valid = walk_line_valid && (act_flush || act_inv);
  assign cpu_clean_line  = walk_line;
  always @(negedge clk) if (rst_n) begin
    walk_done <= 1'b0;
    if (walk_line_valid) begin
      if (act_flush) begin vault[wcur] = pdata[wcur]; pdirty[wcur] = 0; end
      if (act_merge) begin mq_line.push_back(wcur); mq_core.push_back(int'(act_merge_core)); end
      if (act_inv)   begin pdirty.delete(wcur); end
    end
    if (walk_start) begin walking = 1; wq.delete(); foreach (pdirty[l]) wq.push_back(l); end
    if (merge_valid) begin
      if (merge_ready) begin
        merge_valid <= 1'b0; pdata.delete(merge_line);
        void'(mq_line.pop_front()); void'(mq_core.pop_front());
      end
      walk_line_valid <= 1'b0;
    end else if (walking && wq.size() != 0) begin
      wcur = wq.pop_front();
      walk_line_valid <= 1'b1; walk_line <= line_addr_t'(wcur); walk_dirty <= pdirty[wcur];
    end else if (walking && mq_line.size() != 0 && !walk_line_valid) begin
      merge_valid <= 1'b1; merge_line <= line_addr_t'(mq_line[0]);
      merge_core <= PW'(mq_core[0]); merge_data <= pdata[mq_line[0]];
    end else begin
      walk_line_valid <= 1'b0;
      if (walking && !walk_line_valid && mq_line.size() == 0) begin walking = 0; walk_done <= 1'b1; end
    end
  end
  // PIM-DBI write-back of a dirty processor line
  always @(negedge clk) if (rst_n && dbi_wb_valid && dbi_wb_ready)
    if (pdirty.exists(dbi_wb_line) && pdirty[dbi_wb_line]) begin
      vault[dbi_wb_line] = pdata[dbi_wb_line]; pdirty[dbi_wb_line] = 0;
    end

  int n_cpu_stall = 0;
  task automatic cpu_write(longint unsigned l, int w, longint unsigned d);
    @(negedge clk); cpu_wr_valid = 1; cpu_wr_line = line_addr_t'(l);
    @(posedge clk); while (cpu_wr_stall) begin n_cpu_stall++; @(posedge clk); end
    @(negedge clk); cpu_wr_valid = 0;
    if (!pdata.exists(l)) pdata[l] = vread(l);
    pdata[l][w*WORD_W +: WORD_W] = d; pdirty[l] = 1;
  endtask

  // ---------------- PIM cores ----------------
  op_t prog [P][$];
  int pc [P], ckpt [P], wcnt [P];
  bit inreq [P];
  longint unsigned ldval [P][int];
  int n_restore [P], n_done [P];
  always @(posedge clk) if (rst_n) for (int p = 0; p < P; p++) begin
    sync_prim[p] <= 1'b0; kernel_end[p] <= 1'b0; retire[p] <= 1'b0;
    if (kernel_done[p]) n_done[p]++;
    if (core_checkpoint[p]) ckpt[p] = pc[p];
    if (core_restore[p]) begin
      pc[p] = ckpt[p]; inreq[p] = 0; req_valid[p] <= 1'b0; wcnt[p] = 0; n_restore[p]++;
    end else if (inreq[p]) begin
      if (rsp_valid[p]) begin
        if (prog[p][pc[p]].k == LD) ldval[p][pc[p]] = rsp_rdata[p];
        inreq[p] = 0; req_valid[p] <= 1'b0; pc[p]++;
      end
    end else if (core_run[p] && pc[p] < prog[p].size()) begin
      automatic op_t o = prog[p][pc[p]];
      unique case (o.k)
        LD, ST: begin
          inreq[p] = 1; req_valid[p] <= 1'b1; req_we[p] <= (o.k == ST);
          req_addr[p] <= PADDR_W'((o.line << 6) | longint'(o.w * 8)); req_wdata[p] <= o.d;
        end
        WT:  begin wcnt[p]++; if (wcnt[p] >= o.n) begin wcnt[p] = 0; pc[p]++; end end
        RET: begin retire[p] <= 1'b1; wcnt[p]++; if (wcnt[p] >= o.n) begin wcnt[p] = 0; pc[p]++; end end
        SYN: begin sync_prim[p] <= 1'b1; pc[p]++; end
        ENDK: begin kernel_end[p] <= 1'b1; pc[p]++; end
        default: pc[p]++;
      endcase
    end
  end
  initial for (int p = 0; p < P; p++) begin pc[p] = 0; ckpt[p] = 0; wcnt[p] = 0; inreq[p] = 0; n_restore[p] = 0; n_done[p] = 0; end

  function automatic op_t mk(opk_e k, longint unsigned l = 0, int w = 0, longint unsigned d = 0, int n = 0);
    op_t o; o.k = k; o.line = l; o.w = w; o.d = d; o.n = n; return o;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_sigfull = 0, n_icap = 0, n_evict = 0, n_sync = 0, n_end = 0, n_lockstall = 0;
  always @(posedge clk) if (rst_n) for (int p = 0; p < P; p++) if (core_run[p]) begin
    if (stop_cause[p][0]) n_sigfull++;
    if (stop_cause[p][1]) n_icap++;
    if (stop_cause[p][2]) n_evict++;
    if (stop_cause[p][3]) n_sync++;
    if (stop_cause[p][4]) n_end++;
  end

  task automatic go(int p); @(negedge clk); launch[p] = 1; @(negedge clk); launch[p] = 0; endtask
  task automatic wait_done(int p, int k, longint limit);
    automatic longint t0 = cyc;
    while (n_done[p] < k && cyc - t0 < limit) @(posedge clk);
    chk(n_done[p] >= k, $sformatf("core %0d kernel done", p));
  endtask

  localparam longint unsigned A = 42'h10_0000, B = 42'h10_0101, C = 42'h10_0202;
  initial begin
    for (int p = 0; p < P; p++) prog[p] = {};
    #22 rst_n = 1;
    // core 3: long kernel, hits the 1M-instruction cap (and sees DBI triggers)
    prog[3] = {mk(RET, 0, 0, 0, INSN_LIMIT + 100), mk(ENDK)};
    go(3);
    // ---- example conflict on core 0 ----
    cpu_write(A, 2, 64'hAAAA);
    prog[0] = {mk(LD, C, 0), mk(ST, B, 0, 64'hB0B0), mk(LD, A, 2), mk(WT, 0, 0, 0, 200), mk(ENDK)};
    go(0);
    repeat (40) @(posedge clk);
    cpu_write(C, 1, 64'hCCCC);
    wait (n_restore[0] >= 1);
    cpu_write(B, 1, 64'hB1B1);           // WAW on B during the re-run
    wait_done(0, 1, 20000);
    chk(n_rollbacks[0] >= 1, "core 0 rolled back");
    chk(ldval[0][2] == 64'hAAAA, "re-run reads A written by the processor");
    chk(vread(B)[0 +: 64] == 64'hB0B0 && vread(B)[64 +: 64] == 64'hB1B1, "B merged word by word");
    // ---- read set fills, speculative eviction, sync ----
    for (int i = 0; i < 260; i++) prog[1].push_back(mk(LD, 42'h20_0000 + i, 0));
    prog[1].push_back(mk(ENDK));
    for (int i = 0; i < 5; i++) prog[2].push_back(mk(ST, 42'h30_0000 + i * 256, 0, i));
    prog[2].push_back(mk(ENDK));
    prog[4] = {mk(LD, 42'h40_0000), mk(SYN), mk(ST, 42'h40_0001, 0, 7), mk(ENDK)};
    go(1); go(2); go(4);
    // ---- PIM-DBI row eviction: writes to 17 rows ----
    for (int r = 0; r < 17; r++) cpu_write(42'h50_0000 + r * 64, 0, r);
    wait_done(1, 1, 40000); wait_done(2, 1, 20000); wait_done(4, 1, 20000);
    chk(vread(42'h30_0000 + 4 * 256)[63:0] == 4, "store after eviction committed");
    // ---- sharing: core 6 reads core 5's speculative data ----
    prog[5] = {mk(ST, 42'h60_0000, 0, 55), mk(WT, 0, 0, 0, 300), mk(ENDK)};
    prog[6] = {mk(LD, 42'h60_0010), mk(ENDK)};
    go(5); repeat (20) @(posedge clk);
    go(6); @(negedge clk); spec_read_src[6] = P'(1) << 5; @(negedge clk); spec_read_src[6] = '0;
    wait_done(5, 1, 20000); wait_done(6, 1, 20000);
    // ---- squash: core 7 read core 8's data, core 8 rolls back ----
    prog[8] = {mk(LD, 42'h70_0000), mk(WT, 0, 0, 0, 100), mk(ENDK)};
    prog[7] = {mk(LD, 42'h70_0100), mk(WT, 0, 0, 0, 2000), mk(ENDK)};
    go(8); go(7);
    @(negedge clk); spec_read_src[7] = P'(1) << 8; @(negedge clk); spec_read_src[7] = '0;
    cpu_write(42'h70_0000, 3, 1);
    wait_done(8, 1, 20000); wait_done(7, 1, 20000);
    chk(n_restore[7] >= 1, "core 7 squashed and restarted");
    // ---- forward progress: core 9 rolls back 3 times, then its read set is locked ----
    prog[9] = {mk(LD, 42'h80_0000), mk(WT, 0, 0, 0, 300), mk(ENDK)};
    go(9);
    for (int r = 0; r < 3; r++) begin
      repeat (50) @(posedge clk);
      cpu_write(42'h80_0000, 1, r);
      wait (n_restore[9] >= r + 1);
    end
    chk(n_locks >= 1, "read set locked");
    begin
      automatic int s0 = n_cpu_stall;
      cpu_write(42'h80_0000, 2, 9);       // stalls until core 9 commits
      chk(n_cpu_stall > s0, "processor write stalled on locked line");
      n_lockstall = n_cpu_stall - s0;
    end
    wait_done(9, 1, 20000);
    // ---- core 3 and two DBI triggers ----
    wait_done(3, 1, 3_000_000);
    // ---- mechanisms ----
    chk(n_rollback_groups > 0, "rollback");
    chk(n_commit_groups > 0, "commit");
    chk(n_waw > 0, "WAW merge");
    chk(n_sigfull > 0, "signature full");
    chk(n_evict > 0, "speculative eviction");
    chk(n_icap > 0, "instruction cap");
    chk(n_sync > 0, "sync primitive");
    chk(n_end > 0, "kernel end");
    chk(n_shared_groups > 0, "shared group");
    chk(n_locks > 0, "read-set lock");
    chk(n_lockstall > 0, "lock stall");
    chk(n_dbi_triggers > 0, "DBI trigger");
    chk(n_dbi_evictions > 0, "DBI row eviction");
    chk(n_partial_commits[1] >= 2, "partial kernels on core 1");
    $display("mechanisms: rollback=%0d commit=%0d waw=%0d sigfull=%0d evict=%0d icap=%0d sync=%0d end=%0d shared=%0d lock=%0d lockstall=%0d dbi_trig=%0d dbi_evict=%0d cycles=%0d",
             n_rollback_groups, n_commit_groups, n_waw, n_sigfull, n_evict, n_icap, n_sync, n_end,
             n_shared_groups, n_locks, n_lockstall, n_dbi_triggers, n_dbi_evictions, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
