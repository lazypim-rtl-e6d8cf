// tb_pim_l1_cache -- PIM L1 at its default 64 kB, 4-way geometry against a
// behavioural vault memory.  Checks: read miss and refill data; a store marks
// the line speculative (written back at commit); WAW merge keeps the words
// the PIM core wrote and takes the others from the processor; a merge for a
// line not held goes straight to memory; a fifth line in a set whose four
// ways are speculative raises spec_evict and is not served; commit writes back
// exactly the speculative lines with merged data; rollback discards the
// speculative data so the next read refetches the memory value.
module tb_pim_l1_cache;
  import lazypim_pkg::*;
  logic clk = 0, rst_n = 0;
  logic core_en = 1, req_valid = 0, req_we = 0;
  logic [PADDR_W-1:0] req_addr = '0;
  logic [WORD_W-1:0]  req_wdata = '0;
  logic rsp_valid, rsp_we, spec_evict;
  line_addr_t rsp_line;
  logic [WORD_W-1:0] rsp_rdata;
  logic cmd_commit = 0, cmd_rollback = 0, commit_done, rollback_done, busy;
  logic merge_valid = 0; line_addr_t merge_line = '0; logic [LINE_BITS-1:0] merge_data = '0;
  logic merge_ready;
  logic mem_req_valid, mem_req_we; line_addr_t mem_req_line; logic [LINE_BITS-1:0] mem_req_wdata;
  logic mem_req_ready = 1, mem_rsp_valid = 0; logic [LINE_BITS-1:0] mem_rsp_rdata = '0;

  pim_l1_cache dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_rd = 0, n_wr = 0;
  logic [LINE_BITS-1:0] mem [line_addr_t];

  function automatic logic [LINE_BITS-1:0] init_line(line_addr_t l);
    logic [LINE_BITS-1:0] v;
    for (int w = 0; w < WORDS; w++) v[w*WORD_W +: WORD_W] = {22'h0, l} * 64'd16 + 64'(w);
    return v;
  endfunction
  function automatic logic [LINE_BITS-1:0] rd_mem(line_addr_t l);
    return mem.exists(l) ? mem[l] : init_line(l);
  endfunction

  // vault model: reads answer 4 cycles after acceptance, writes are posted
  always @(posedge clk) begin
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req_we) begin mem[mem_req_line] = mem_req_wdata; n_wr++; end
      else begin
        automatic line_addr_t l = mem_req_line;
        n_rd++;
        fork begin
          repeat (3) @(posedge clk);
          mem_rsp_rdata <= rd_mem(l); mem_rsp_valid <= 1;
          @(posedge clk); mem_rsp_valid <= 0;
        end join_none
      end
    end
  end

  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [PADDR_W-1:0] ba(line_addr_t l, int w);
    return {l, 3'(w), 3'b000};
  endfunction

  task automatic access(bit we, logic [PADDR_W-1:0] a, logic [WORD_W-1:0] d,
                        output logic [WORD_W-1:0] q, output bit evicted);
    int t = 0;
    evicted = 0;
    req_valid = 1; req_we = we; req_addr = a; req_wdata = d;
    do begin
      @(posedge clk); #1; t++;
      if (spec_evict) evicted = 1;
    end while (!rsp_valid && !evicted && t < 100);
    // spec_evict is combinational: sample it before the edge too
    q = rsp_rdata;
    if (rsp_valid) chk(rsp_we == we && rsp_line == a[PADDR_W-1:LINE_OFS], "rsp line/we");
    req_valid = 0;
  endtask

  task automatic do_merge(line_addr_t l, logic [LINE_BITS-1:0] d);
    merge_valid = 1; merge_line = l; merge_data = d;
    do @(posedge clk); while (!merge_ready);
    #1 merge_valid = 0;
    repeat (3) @(posedge clk);
  endtask

  logic [WORD_W-1:0] q;
  bit ev;
  line_addr_t A, B, C;
  logic [LINE_BITS-1:0] D;

  initial begin
    A = 42'h12345; B = 42'h777; C = 42'h3_0001;
    #12 rst_n = 1; repeat (2) @(posedge clk); #1;
    // 1. read miss
    access(0, ba(A, 2), 0, q, ev);
    chk(q == init_line(A)[2*WORD_W +: WORD_W] && n_rd == 1, "read miss refill data");
    access(0, ba(A, 5), 0, q, ev);
    chk(q == init_line(A)[5*WORD_W +: WORD_W] && n_rd == 1, "read hit, no refetch");
    // 2. speculative store
    access(1, ba(A, 3), 64'hDEAD_BEEF_0000_0003, q, ev);
    access(0, ba(A, 3), 0, q, ev);
    chk(q == 64'hDEAD_BEEF_0000_0003, "store visible to own loads");
    chk(n_wr == 0, "store not written through");
    // 3. WAW merge from processor
    for (int w = 0; w < WORDS; w++) D[w*WORD_W +: WORD_W] = 64'hC0C0_0000_0000_0000 + 64'(w);
    do_merge(A, D);
    access(0, ba(A, 0), 0, q, ev); chk(q == D[0 +: WORD_W], "merged word from processor");
    access(0, ba(A, 3), 0, q, ev); chk(q == 64'hDEAD_BEEF_0000_0003, "PIM-written word kept");
    // 4. merge for a line not held goes to memory
    do_merge(B, D);
    chk(n_wr == 1 && mem.exists(B) && mem[B] == D, "unheld merge forwarded to memory");
    // 5. four speculative ways in set of C, fifth line refused
    for (int k = 0; k < 4; k++) access(1, ba(C + line_addr_t'(k * 256), 1), 64'(100 + k), q, ev);
    access(0, ba(C + line_addr_t'(4 * 256), 0), 0, q, ev);
    chk(ev, "spec_evict when all ways speculative");
    // 6. commit
    n_wr = 0;
    cmd_commit = 1; @(posedge clk); #1; cmd_commit = 0;
    begin int t = 0; while (!commit_done && t < 2000) begin @(posedge clk); #1; t++; end end
    chk(n_wr == 5, $sformatf("commit wrote %0d lines, expect 5", n_wr));
    begin
      automatic logic [LINE_BITS-1:0] expA = D;
      expA[3*WORD_W +: WORD_W] = 64'hDEAD_BEEF_0000_0003;
      chk(mem[A] == expA, "committed line A = merge of processor and PIM words");
      if (mem[A] != expA) $display("got %h\nexp %h", mem[A], expA);
    end
    for (int k = 0; k < 4; k++) begin
      automatic logic [LINE_BITS-1:0] e = init_line(C + line_addr_t'(k * 256));
      e[1*WORD_W +: WORD_W] = 64'(100 + k);
      chk(mem[C + line_addr_t'(k * 256)] == e, "committed speculative line");
    end
    access(0, ba(C + line_addr_t'(4 * 256), 0), 0, q, ev);
    chk(!ev && q == init_line(C + line_addr_t'(4 * 256))[0 +: WORD_W], "fifth line served after commit");
    // 7. rollback discards speculative data
    access(1, ba(B, 6), 64'h5555, q, ev);
    n_rd = 0; n_wr = 0;
    cmd_rollback = 1; @(posedge clk); #1; cmd_rollback = 0;
    chk(rollback_done, "rollback done next cycle");
    access(0, ba(B, 6), 0, q, ev);
    chk(q == D[6*WORD_W +: WORD_W] && n_rd == 1 && n_wr == 0, "after rollback, memory value refetched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
