// tb_pim_dbi -- PIM-DBI at the paper's geometry (16 rows x 64 blocks) and
// interval (800K cycles).  A reference model (associative array of dirty
// lines) is kept beside the index.  Checks: marks and cleans; a 17th row
// stalls the write, evicts one row (its dirty lines written back) and then
// proceeds; the trigger fires every 800,000 cycles exactly, and each trigger
// writes back exactly the dirty lines of the model, once each.  wb_ready is
// random.
module tb_pim_dbi;
  import lazypim_pkg::*;
  logic clk = 0, rst_n = 0;
  logic mark_valid = 0, clean_valid = 0, wb_ready, mark_stall, wb_valid, flushing;
  line_addr_t mark_line = '0, clean_line = '0, wb_line;
  logic [31:0] n_triggers, n_row_evictions;

  pim_dbi dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0, trig_t[$];
  bit model [line_addr_t];
  line_addr_t wb_seen[$];
  logic flushing_d = 0;

  always @(posedge clk) wb_ready <= ($urandom % 4) != 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    flushing_d <= flushing;
    if (flushing && !flushing_d) trig_t.push_back(cyc);
    if (wb_valid && wb_ready) begin wb_seen.push_back(wb_line); model.delete(wb_line); end
  end

  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic mark(line_addr_t l);
    mark_valid = 1; mark_line = l;
    @(posedge clk); while (mark_stall) @(posedge clk);
    #1 mark_valid = 0; model[l] = 1;
  endtask

  task automatic clean(line_addr_t l);
    clean_valid = 1; clean_line = l; @(posedge clk); #1 clean_valid = 0; model.delete(l);
  endtask

  function automatic line_addr_t L(int row, int blk);
    return line_addr_t'(64'h1000 + row * 977) << 6 | line_addr_t'(blk);
  endfunction

  initial begin
    #12 rst_n = 1; @(posedge clk); #1;
    for (int r = 0; r < 16; r++) for (int b = 0; b < 3; b++) mark(L(r, b * 5 + r % 4));
    clean(L(2, 5 + 2));
    chk(n_row_evictions == 0, "16 rows fit");
    begin
      automatic int n0 = wb_seen.size();
      mark_valid = 1; mark_line = L(20, 1); #1;
      chk(mark_stall, "17th row stalls");
      @(posedge clk); while (mark_stall) @(posedge clk);
      #1 mark_valid = 0; model[L(20, 1)] = 1;
      chk(n_row_evictions == 1, "one row eviction");
      chk(wb_seen.size() - n0 == 3, $sformatf("evicted row wrote %0d lines", wb_seen.size() - n0));
      for (int i = n0; i < wb_seen.size(); i++) chk(wb_seen[i] >> 6 == L(0, 0) >> 6, "evicted lines from row 0");
    end
    // wait for the first trigger, then check the flush result
    wait (trig_t.size() == 1);
    begin
      automatic int n0 = wb_seen.size();
      automatic int nd = model.num();
      wait (!flushing); @(posedge clk); #1;
      chk(model.num() == 0, "all dirty lines written back");
      chk(wb_seen.size() - n0 == nd, $sformatf("flush wrote %0d lines, expect %0d", wb_seen.size() - n0, nd));
    end
    mark(L(7, 9)); mark(L(7, 10));
    wait (trig_t.size() == 2);
    chk(trig_t[1] - trig_t[0] == DBI_INTERVAL, $sformatf("trigger interval %0d cycles", trig_t[1] - trig_t[0]));
    wait (!flushing); @(posedge clk); #1;
    chk(model.num() == 0 && n_triggers == 2, "second flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2_000_000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
