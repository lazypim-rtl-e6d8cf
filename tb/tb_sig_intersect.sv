// tb_sig_intersect -- checks the signature intersection: a register matches
// only when every one of the 4 segments of the AND is non-empty.  Uses
// signatures built from addresses (shared address => must match) and hand-made
// patterns with one segment empty (must not match).
module tb_sig_intersect;
  import lazypim_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned N = SIG_BITS, M = SIG_M, SEG = N / M, HW = 9, R = CWS_REGS;
  logic [N-1:0] pim_sig;
  logic [R-1:0][N-1:0] cws;
  logic [R-1:0] reg_hit;
  logic hit;
  int checks = 0, failures = 0;

  sig_intersect dut (.*);

  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [N-1:0] sig_of(longint unsigned a);
    logic [N-1:0] v = '0;
    for (int s = 0; s < M; s++) v[s*SEG + ref_idx(a, s, HW, LINE_W)] = 1'b1;
    return v;
  endfunction

  function automatic bit ref_match(logic [N-1:0] a, logic [N-1:0] b);
    bit m = 1;
    for (int s = 0; s < M; s++) m &= |((a & b) >> (s*SEG) & {{(N-SEG){1'b0}}, {SEG{1'b1}}});
    return m;
  endfunction

  initial begin
    for (int t = 0; t < 200; t++) begin
      automatic longint unsigned shared = rand_line(LINE_W);
      automatic int which = $urandom_range(R - 1);
      automatic bit share = (t % 2 == 0);
      pim_sig = '0;
      for (int i = 0; i < 10; i++) pim_sig |= sig_of(rand_line(LINE_W));
      if (share) pim_sig |= sig_of(shared);
      for (int r = 0; r < R; r++) begin
        cws[r] = '0;
        for (int i = 0; i < 5; i++) cws[r] |= sig_of(rand_line(LINE_W));
      end
      if (share) cws[which] |= sig_of(shared);
      #1;
      for (int r = 0; r < R; r++) chk(reg_hit[r] == ref_match(pim_sig, cws[r]), "per-register match");
      chk(hit == |reg_hit, "hit is OR");
      if (share) chk(reg_hit[which], "shared address found");
    end
    // three segments overlapping, the fourth empty: no match
    pim_sig = '0; cws = '0;
    for (int s = 0; s < 3; s++) begin pim_sig[s*SEG + 7] = 1; cws[5][s*SEG + 7] = 1; end
    pim_sig[3*SEG + 1] = 1; cws[5][3*SEG + 2] = 1; #1;
    chk(!hit, "one empty segment means no conflict");
    cws[5][3*SEG + 1] = 1; #1;
    chk(hit && reg_hit == R'(1) << 5, "all segments overlap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
