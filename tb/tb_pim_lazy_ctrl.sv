// tb_pim_lazy_ctrl -- PIM-side controller (core ID 2 of 16) with the L1 and
// the processor replaced by the testbench.  Checks: checkpoint on launch;
// loads go to PIMReadSet and stores to PIMWriteSet (compared with bit-array
// models); stop on kernel end, then the signatures are offered to the link;
// commit sequence (L1 commit, commit_ack, kernel_done, back to idle); a stop
// on a synchronization primitive followed by a rollback (L1 rollback,
// core_restore, signatures erased, running again); the speculative read bit
// makes the core wait for its source core; a rollback of the source core
// squashes this core while it runs; a commit of the source clears the bit.
module tb_pim_lazy_ctrl;
  import lazypim_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned P = NPIM, N = SIG_BITS, M = SIG_M, SEG = N / M, HW = 9, ID = 2;
  logic clk = 0, rst_n = 0;
  logic launch = 0, retire = 0, sync_prim = 0, kernel_end = 0;
  logic core_run, core_checkpoint, core_restore, kernel_done;
  logic l1_rsp_valid = 0, l1_rsp_we = 0; line_addr_t l1_rsp_line = '0;
  logic l1_spec_evict = 0, l1_busy = 0, l1_commit_done = 0, l1_rollback_done = 0;
  logic l1_cmd_commit, l1_cmd_rollback;
  logic [P-1:0] spec_read_src = '0, peer_waiting = '0, commit_mask = '0, rollback_mask = '0;
  logic waiting, tx_valid, tx_ready = 0, squashed, commit_ack;
  logic [N-1:0] tx_prs, tx_pws; logic [P-1:0] tx_rb;
  logic [4:0] stop_cause; logic [31:0] n_partial_commits, n_rollbacks;

  pim_lazy_ctrl #(.ID(ID)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [N-1:0] mrs, mws;
  logic seen_ckpt = 0, seen_restore = 0, seen_done = 0, seen_ack = 0, seen_cc = 0, seen_cr = 0;
  always @(posedge clk) if (rst_n) begin
    if (core_checkpoint) seen_ckpt = 1;
    if (core_restore)    seen_restore = 1;
    if (kernel_done)     seen_done = 1;
    if (commit_ack)      seen_ack = 1;
    if (l1_cmd_commit)   begin seen_cc = 1; fork begin @(posedge clk); @(posedge clk); l1_commit_done <= 1; @(posedge clk); l1_commit_done <= 0; end join_none end
    if (l1_cmd_rollback) begin seen_cr = 1; fork begin @(posedge clk); l1_rollback_done <= 1; @(posedge clk); l1_rollback_done <= 0; end join_none end
  end

  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic pulse(ref logic s); s = 1; @(posedge clk); #1; s = 0; endtask
  task automatic acc(bit we, longint unsigned l);
    l1_rsp_valid = 1; l1_rsp_we = we; l1_rsp_line = line_addr_t'(l);
    for (int s = 0; s < M; s++)
      if (we) mws[s*SEG + ref_idx(l, s, HW, LINE_W)] = 1; else mrs[s*SEG + ref_idx(l, s, HW, LINE_W)] = 1;
    @(posedge clk); #1; l1_rsp_valid = 0;
  endtask
  task automatic wait_for(ref logic s, input int lim, input string what);
    int t = 0;
    while (!s && t < lim) begin @(posedge clk); #1; t++; end
    chk(s, what);
  endtask

  initial begin
    mrs = '0; mws = '0;
    #12 rst_n = 1; @(posedge clk); #1;
    chk(!core_run, "idle after reset");
    pulse(launch); #1;
    chk(core_run, "running after launch"); @(posedge clk); #1; chk(seen_ckpt, "checkpoint at start");
    for (int i = 0; i < 20; i++) acc(i % 3 == 0, rand_line(LINE_W));
    kernel_end = 1; @(posedge clk); #1; kernel_end = 0;
    chk(!core_run, "stopped at kernel end");
    wait_for(tx_valid, 5, "signatures offered");
    chk(tx_prs == mrs && tx_pws == mws, "PIMReadSet / PIMWriteSet contents");
    pulse(tx_ready); #1; chk(waiting && !tx_valid, "waiting for answer");
    commit_mask[ID] = 1; @(posedge clk); #1; commit_mask = '0;
    wait_for(seen_done, 20, "kernel_done after commit");
    chk(seen_cc && seen_ack && n_partial_commits == 1, "L1 commit and commit_ack");
    chk(!core_run && !waiting, "idle after kernel end");
    // second kernel: stop at a synchronization primitive, processor rolls back
    mrs = '0; mws = '0; seen_ckpt = 0;
    pulse(launch); #1;
    acc(0, 42'h1234);
    pulse(sync_prim); #1;
    chk(!core_run && stop_cause == 5'b0, "stopped at sync primitive");
    wait_for(tx_valid, 5, "signatures offered (sync)");
    chk(tx_prs == mrs && tx_pws == '0, "signatures of partial kernel 2");
    pulse(tx_ready);
    rollback_mask[ID] = 1; @(posedge clk); #1; rollback_mask = '0;
    wait_for(seen_restore, 20, "core_restore after rollback");
    chk(seen_cr && n_rollbacks == 1, "L1 rollback");
    chk(core_run && tx_prs == '0 && tx_pws == '0, "running again with empty signatures");
    // speculative read of core 5's data: wait for core 5
    spec_read_src[5] = 1; @(posedge clk); #1; spec_read_src = '0;
    chk(tx_rb == P'(1) << 5, "speculative read bit set");
    pulse(kernel_end);
    repeat (5) @(posedge clk); #1;
    chk(!tx_valid, "waits for source core to finish");
    peer_waiting[5] = 1;
    wait_for(tx_valid, 5, "sends once source waits");
    chk(tx_rb == P'(1) << 5, "bits travel with the signatures");
    pulse(tx_ready);
    // source rolls back while this core waits: squashed
    rollback_mask[5] = 1; @(posedge clk); #1; rollback_mask = '0; peer_waiting = '0;
    chk(squashed, "squashed by source rollback");
    rollback_mask[ID] = 1; @(posedge clk); #1; rollback_mask = '0;
    seen_restore = 0; wait_for(seen_restore, 20, "restore after squash");
    chk(!squashed && tx_rb == '0, "bits cleared after rollback");
    // squash while running: local rollback
    spec_read_src[7] = 1; @(posedge clk); #1; spec_read_src = '0;
    seen_restore = 0; seen_cr = 0;
    rollback_mask[7] = 1; @(posedge clk); #1; rollback_mask = '0;
    wait_for(seen_restore, 20, "local rollback while running");
    chk(seen_cr && n_rollbacks == 3, "rollback count");
    // commit of the source clears the bit
    spec_read_src[9] = 1; @(posedge clk); #1; spec_read_src = '0;
    commit_mask[9] = 1; @(posedge clk); #1; commit_mask = '0;
    chk(tx_rb == '0, "source commit clears bit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
