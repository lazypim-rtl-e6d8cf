// tb_bloom_signature -- drives a 2 Kbit, M=4 signature at its default sizes.
// Checks against a bit-array model: register contents after each insertion,
// no false negatives, the counter counting only new addresses, full at 250,
// the false-positive rate at 250 addresses under the 30 % design target, and
// clear.
module tb_bloom_signature;
  import lazypim_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned N = SIG_BITS, M = SIG_M, SEG = N / M, HW = 9;
  logic clk = 0, rst_n = 0, clr = 0, ins = 0;
  logic [LINE_W-1:0] ins_addr = '0, test_addr = '0;
  logic test_hit, full;
  logic [N-1:0] sig;
  logic [7:0] count;
  logic [N-1:0] model;
  longint unsigned inserted[$];
  int checks = 0, failures = 0, fp = 0, exp_cnt = 0;

  bloom_signature dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit model_has(longint unsigned a);
    bit h = 1;
    for (int s = 0; s < M; s++) h &= model[s*SEG + ref_idx(a, s, HW, LINE_W)];
    return h;
  endfunction

  task automatic do_ins(longint unsigned a);
    if (!model_has(a)) exp_cnt++;
    for (int s = 0; s < M; s++) model[s*SEG + ref_idx(a, s, HW, LINE_W)] = 1'b1;
    ins_addr = LINE_W'(a); ins = 1; @(posedge clk); #1; ins = 0;
    chk(sig == model, "sig contents");
    chk(int'(count) == exp_cnt, "count");
  endtask

  initial begin
    model = '0;
    #12 rst_n = 1; @(posedge clk); #1;
    chk(sig == '0 && count == 0 && !full, "reset state");
    while (exp_cnt < 249) begin
      automatic longint unsigned a = rand_line(LINE_W);
      inserted.push_back(a); do_ins(a);
      if (exp_cnt < 250) chk(!full, "not full early");
    end
    // re-insert an existing address: count must not move
    do_ins(inserted[0]);
    chk(int'(count) == 249, "duplicate not counted");
    begin automatic longint unsigned a = rand_line(LINE_W); inserted.push_back(a); do_ins(a); end
    chk(full == (exp_cnt >= 250), "full at 250");
    foreach (inserted[i]) begin
      test_addr = LINE_W'(inserted[i]); #1; chk(test_hit, "no false negative");
    end
    for (int i = 0; i < 1000; i++) begin
      automatic longint unsigned a = rand_line(LINE_W);
      test_addr = LINE_W'(a); #1;
      chk(test_hit == model_has(a), "test matches model");
      if (test_hit) fp++;
    end
    $display("false positives at %0d addresses: %0d / 1000", exp_cnt, fp);
    chk(fp < 300, "false positive rate below 30 %");
    clr = 1; @(posedge clk); #1; clr = 0;
    chk(sig == '0 && count == 0 && !full, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
