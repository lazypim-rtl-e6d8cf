// tb_h3_hash -- checks h3_hash against the matrix formula for random line
// addresses, single-bit addresses (each output must equal one matrix row) and
// zero (all outputs zero).
module tb_h3_hash;
  import lazypim_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned HW = 9;
  logic [LINE_W-1:0]      addr;
  logic [SIG_M-1:0][HW-1:0] idx;
  int checks = 0, failures = 0;

  h3_hash #(.ADDR_W(LINE_W), .M(SIG_M), .HASH_W(HW)) dut (.addr, .idx);

  task automatic check_addr(longint unsigned a);
    addr = LINE_W'(a); #1;
    for (int s = 0; s < SIG_M; s++) begin
      checks++;
      if (int'(idx[s]) != ref_idx(a, s, HW, LINE_W)) begin
        failures++;
        $display("FAIL addr=%h seg=%0d got=%0d exp=%0d", a, s, idx[s], ref_idx(a, s, HW, LINE_W));
      end
    end
  endtask

  initial begin
    check_addr(0);
    for (int i = 0; i < LINE_W; i++) check_addr(64'd1 << i);
    for (int i = 0; i < 500; i++) check_addr(rand_line(LINE_W));
    // the four segments must hash differently (independent functions)
    addr = LINE_W'(42'h123_4567_89ab); #1;
    checks++; if (idx[0] == idx[1] && idx[1] == idx[2] && idx[2] == idx[3]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
