// tb_cpu_write_set -- 16 x 2 Kbit CPUWriteSet at default sizes.  Checks that
// insertions go round robin to the registers (each register equals its own
// bit-array model), that membership is the OR over registers, and clear.
module tb_cpu_write_set;
  import lazypim_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned N = SIG_BITS, M = SIG_M, SEG = N / M, HW = 9, R = CWS_REGS;
  logic clk = 0, rst_n = 0, clr = 0, ins = 0;
  logic [LINE_W-1:0] ins_addr = '0, test_addr = '0;
  logic test_hit;
  logic [R-1:0][N-1:0] regs;
  logic [4:0] rr_ptr_o;
  logic [N-1:0] model [R];
  longint unsigned lines[$];
  int checks = 0, failures = 0;

  cpu_write_set dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int r = 0; r < R; r++) model[r] = '0;
    #12 rst_n = 1; @(posedge clk); #1;
    for (int i = 0; i < 100; i++) begin
      automatic longint unsigned a = rand_line(LINE_W);
      lines.push_back(a);
      for (int s = 0; s < M; s++) model[i % R][s*SEG + ref_idx(a, s, HW, LINE_W)] = 1'b1;
      ins_addr = LINE_W'(a); ins = 1; @(posedge clk); #1; ins = 0;
      chk(int'(rr_ptr_o) == (i + 1) % R, "round robin pointer");
    end
    for (int r = 0; r < R; r++) chk(regs[r] == model[r], $sformatf("register %0d contents", r));
    foreach (lines[i]) begin test_addr = LINE_W'(lines[i]); #1; chk(test_hit, "member"); end
    clr = 1; @(posedge clk); #1; clr = 0;
    chk(regs == '0 && rr_ptr_o == 0, "clear");
    test_addr = LINE_W'(lines[3]); #1; chk(!test_hit, "empty after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
