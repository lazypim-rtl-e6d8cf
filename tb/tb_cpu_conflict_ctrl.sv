// tb_cpu_conflict_ctrl -- processor-side conflict detection and resolution at
// the paper's sizes (16 PIM cores, 2 Kbit signatures, 16-register
// CPUWriteSet).  The testbench builds the PIM signatures itself with the
// reference H3 hash, and models the processor cache tag store as an
// associative array (line -> dirty) that it walks one line per cycle when the
// block asks (walk_start), applying flush/invalidate/merge as answered.
// Scenarios: a write before the kernel is found by the launch scan and makes
// a conflict (flush + rollback); a WAW line is merged and invalidated and a
// clean line in the write set is invalidated on commit; a processor write to
// the group's lines stalls while the region is locked; three rollbacks in a
// row lock the read set (writes to it stall until the core commits); a core
// that read another core's speculative data waits for it and both commit as
// one group; a squashed core rolls back.
module tb_cpu_conflict_ctrl;
  import lazypim_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned P = NPIM, N = SIG_BITS, M = SIG_M, SEG = N / M, HW = $clog2(SEG);
  typedef logic [N-1:0] sig_t;
  typedef longint unsigned lq_t[$];

  logic clk = 0, rst_n = 0;
  logic [P-1:0] rx_valid = '0, rx_release, squashed = '0, commit_ack = '0, commit_mask, rollback_mask;
  logic [P-1:0][N-1:0] rx_prs = '0, rx_pws = '0;
  logic [P-1:0][P-1:0] rx_rb = '0;
  logic [P-1:0] src_hold = '0;
  logic launch = 0, cpu_wr_valid = 0, cpu_wr_stall, cpu_wr_hold = 0;
  line_addr_t cpu_wr_line = '0, walk_line = '0;
  logic walk_start, walk_line_valid = 0, walk_dirty = 0, walk_done = 0;
  walk_e walk_cmd;
  logic act_flush, act_inv, act_merge, region_lock;
  logic [$clog2(P)-1:0] act_merge_core;
  logic [31:0] n_commit_groups, n_rollback_groups, n_shared_groups, n_locks, n_waw;

  cpu_conflict_ctrl dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  function automatic sig_t mksig(lq_t ls);
    sig_t s = '0;
    foreach (ls[i]) for (int g = 0; g < M; g++) s[g*SEG + ref_idx(ls[i], g, HW, LINE_W)] = 1'b1;
    return s;
  endfunction

  // ---- processor cache tag store model and walk ----
  bit dirty [longint unsigned];
  longint unsigned wq[$], flushed[$], invalidated[$], merged[$];
  int merged_core[$];
  bit walking = 0;
  longint unsigned cur;
  always @(negedge clk) if (rst_n) begin
    walk_done <= 1'b0;
    if (walk_line_valid) begin          // actions for the line shown last cycle
      if (act_flush) begin flushed.push_back(cur); dirty[cur] = 0; end
      if (act_merge) begin merged.push_back(cur); merged_core.push_back(int'(act_merge_core)); end
      if (act_inv)   begin invalidated.push_back(cur); dirty.delete(cur); end
    end
    if (walk_start) begin walking = 1; wq.delete(); foreach (dirty[l]) wq.push_back(l); end
    if (walking && wq.size() != 0) begin
      cur = wq.pop_front();
      walk_line_valid <= 1'b1; walk_line <= line_addr_t'(cur); walk_dirty <= dirty[cur];
    end else begin
      walk_line_valid <= 1'b0;
      if (walking) begin walking = 0; walk_done <= 1'b1; end
    end
  end

  // ---- message buffers: drop on release; record answers ----
  logic [P-1:0] got_commit = '0, got_rollback = '0;
  always @(posedge clk) if (rst_n) rx_valid <= rx_valid & ~rx_release;   // as the link does
  always @(negedge clk) if (rst_n) begin
    got_commit   <= got_commit | commit_mask;
    got_rollback <= got_rollback | rollback_mask;
  end

  task automatic send(int p, lq_t rs, lq_t ws, logic [P-1:0] rb = '0);
    @(negedge clk);
    rx_prs[p] = mksig(rs); rx_pws[p] = mksig(ws); rx_rb[p] = rb; rx_valid[p] = 1'b1;
    got_commit[p] = 0; got_rollback[p] = 0;
  endtask

  task automatic wait_answer(int p, int limit = 400);
    int t = 0;
    while (!(got_commit[p] || got_rollback[p]) && t < limit) begin @(negedge clk); t++; end
    chk(t < limit, $sformatf("core %0d answered", p));
  endtask

  task automatic ack(logic [P-1:0] m);
    repeat (3) @(negedge clk);
    commit_ack = m; @(negedge clk); commit_ack = '0;
  endtask

  task automatic idle_wait();
    int t = 0;
    while ((dut.state != dut.X_IDLE || walking) && t < 200) begin @(negedge clk); t++; end
    repeat (2) @(negedge clk);
  endtask

  task automatic cpu_write(longint unsigned l);
    @(negedge clk); cpu_wr_valid = 1; cpu_wr_line = line_addr_t'(l);
    @(posedge clk); while (cpu_wr_stall) @(posedge clk);
    @(negedge clk); cpu_wr_valid = 0; dirty[l] = 1;
  endtask

  function automatic bit has(lq_t q, longint unsigned l);
    foreach (q[i]) if (q[i] == l) return 1;
    return 0;
  endfunction

  localparam longint unsigned A = 42'h100, B = 42'h2345, C = 42'h3777, D = 42'h4abc,
                              E = 42'h5def, F = 42'h6001, G = 42'h7123, Hh = 42'h8311;
  initial begin
    #12 rst_n = 1;
    // CPU writes A before the kernel; launch scan puts it in CPUWriteSet
    dirty[A] = 1; dirty[F] = 0;
    @(negedge clk); launch = 1; @(negedge clk); launch = 0;
    idle_wait();
    // Fig. 4: PIM reads C, A and writes B, processor writes C during the kernel
    cpu_write(C);
    send(0, '{C, A}, '{B});
    wait_answer(0);
    chk(got_rollback[0] && !got_commit[0], "conflict on A/C -> rollback");
    chk(has(flushed, A) && has(flushed, C), "dirty A, C flushed");
    idle_wait();
    chk(!rx_valid[0] && n_rollback_groups == 1, "released after rollback");
    // re-execution: now CPU also wrote B (WAW), F clean copy of a PIM-written line
    cpu_write(B); dirty[F] = 0;
    send(0, '{C, A}, '{B, F});
    wait_answer(0);
    chk(got_commit[0], "re-execution commits");
    chk(has(merged, B) && merged_core[0] == 0, "WAW line B merged to core 0");
    chk(has(invalidated, B) && has(invalidated, F), "B and clean F invalidated");
    chk(region_lock, "region locked until ack");
    // processor write to a group line stalls while locked, others pass
    @(negedge clk); cpu_wr_valid = 1; cpu_wr_line = line_addr_t'(B); #1;
    chk(cpu_wr_stall, "write to B stalls during commit");
    cpu_wr_line = line_addr_t'(E); #1;
    chk(!cpu_wr_stall, "unrelated write passes");
    @(negedge clk); cpu_wr_valid = 0; dirty[E] = 1;
    ack(P'(1));
    idle_wait();
    chk(!region_lock && n_commit_groups == 1 && n_waw == 1, "commit done, unlocked");
    // forward progress: core 1 rolls back three times on D
    for (int r = 0; r < 3; r++) begin
      cpu_write(D);
      send(1, '{D}, '{G});
      wait_answer(1);
      chk(got_rollback[1], "core 1 rollback");
      idle_wait();
    end
    chk(n_locks == 1, "read set locked after 3 rollbacks");
    @(negedge clk); cpu_wr_valid = 1; cpu_wr_line = line_addr_t'(D); #1;
    chk(cpu_wr_stall, "write to locked line stalls");
    @(negedge clk); cpu_wr_valid = 0;
    send(1, '{D}, '{G});
    wait_answer(1);
    chk(got_commit[1], "locked core commits");
    ack(P'(2)); idle_wait();
    @(negedge clk); cpu_wr_valid = 1; cpu_wr_line = line_addr_t'(D); #1;
    chk(!cpu_wr_stall, "lock released after commit");
    @(negedge clk); cpu_wr_valid = 0; dirty[D] = 1;
    // sharing: core 3 read core 2's speculative data
    send(3, '{Hh}, '{}, P'(1) << 2);
    repeat (40) @(negedge clk);
    chk(rx_valid[3] && !got_commit[3] && !got_rollback[3], "core 3 waits for core 2");
    send(2, '{}, '{Hh});
    wait_answer(3);
    chk(got_commit[3] && got_commit[2], "group commit of cores 2 and 3");
    chk(n_shared_groups == 1, "shared group counted");
    ack(P'(1) << 2); ack(P'(1) << 3);
    idle_wait();
    chk(n_commit_groups == 3, "three commits");
    // squash
    squashed[5] = 1;
    send(5, '{42'h9999}, '{});
    wait_answer(5);
    chk(got_rollback[5], "squashed core rolls back");
    squashed[5] = 0;
    idle_wait();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
