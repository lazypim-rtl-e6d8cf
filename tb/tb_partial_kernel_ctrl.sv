// tb_partial_kernel_ctrl -- default 1M-instruction cap: stop must rise exactly
// when the 1,000,000th instruction of the partial kernel has retired, not
// before; retire pulses outside run are not counted; each of the other four
// causes stops the partial kernel by itself; restart clears the counter.
module tb_partial_kernel_ctrl;
  logic clk = 0, rst_n = 0, run = 0, restart = 0, retire = 0;
  logic rs_full = 0, ws_full = 0, spec_evict = 0, sync_prim = 0, kernel_end = 0;
  logic stop;
  logic [4:0] cause;
  logic [19:0] insn_count;
  int checks = 0, failures = 0;
  int early = 0;

  partial_kernel_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #12 rst_n = 1; @(posedge clk); #1;
    // retire without run: not counted
    retire = 1; repeat (10) @(posedge clk); #1;
    chk(insn_count == 0, "no count outside run");
    run = 1;
    for (int i = 0; i < 999_999; i++) begin
      @(posedge clk); #1;
      if (stop) early++;
    end
    chk(early == 0, "no stop before 1M instructions");
    chk(insn_count == 999_999, "count 999999");
    @(posedge clk); #1;
    chk(insn_count == 1_000_000, "count 1M");
    chk(stop && cause == 5'b00010, "stop at 1M instructions, cause insn");
    retire = 0;
    restart = 1; @(posedge clk); #1; restart = 0;
    chk(insn_count == 0 && !stop, "restart clears");
    rs_full = 1; #1; chk(stop && cause == 5'b00001, "PIMReadSet full"); rs_full = 0;
    ws_full = 1; #1; chk(stop && cause == 5'b00001, "PIMWriteSet full"); ws_full = 0;
    spec_evict = 1; #1; chk(stop && cause == 5'b00100, "speculative eviction"); spec_evict = 0;
    sync_prim = 1; #1; chk(stop && cause == 5'b01000, "synchronization"); sync_prim = 0;
    kernel_end = 1; #1; chk(stop && cause == 5'b10000, "kernel end");
    run = 0; #1; chk(!stop, "no stop when not running"); kernel_end = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (1_100_000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
