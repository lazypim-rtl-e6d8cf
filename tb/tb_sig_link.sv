// tb_sig_link -- 16 senders, 2 Kbit signatures, 64-bit link (65 beats per
// message).  Checks: each message arrives intact in its sender's buffer;
// delivery BEATS+1 cycles after acceptance and one message on the wire at a
// time; round-robin order among simultaneous senders; a sender whose buffer
// is still full is not accepted until the processor releases it.
module tb_sig_link;
  import lazypim_pkg::*;
  localparam int unsigned P = NPIM, N = SIG_BITS, LW = 64;
  localparam int unsigned BEATS = (2 * N + P + LW - 1) / LW;
  logic clk = 0, rst_n = 0;
  logic [P-1:0] tx_valid = '0, tx_ready, rx_valid, rx_release = '0;
  logic [P-1:0][N-1:0] tx_prs, tx_pws, rx_prs, rx_pws;
  logic [P-1:0][P-1:0] tx_rb, rx_rb;
  logic link_valid; logic [LW-1:0] link_data;

  sig_link dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int acc_t [P];
  int order[$];
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n) for (int p = 0; p < P; p++) if (tx_ready[p]) begin
    acc_t[p] = cyc; order.push_back(p);
    tx_valid[p] <= 1'b0;
  end

  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [N-1:0] pat(int p, int k);
    logic [N-1:0] v;
    for (int i = 0; i < N / 32; i++) v[i*32 +: 32] = 32'(p * 1000003 + k * 7919 + i * 104729);
    return v;
  endfunction

  initial begin
    for (int p = 0; p < P; p++) begin
      tx_prs[p] = pat(p, 0); tx_pws[p] = pat(p, 1); tx_rb[p] = P'(p * 3 + 1);
    end
    #12 rst_n = 1; @(posedge clk); #1;
    tx_valid[3] = 1; tx_valid[9] = 1; tx_valid[14] = 1;
    begin
      automatic int t = 0;
      while (rx_valid[3] == 0 && t < 200) begin @(posedge clk); #1; t++; end
    end
    chk(rx_valid[3] && !rx_valid[9], "first message delivered alone");
    chk(cyc - acc_t[3] == BEATS + 1, $sformatf("latency %0d, expect %0d", cyc - acc_t[3], BEATS + 1));
    repeat (2 * (BEATS + 2)) @(posedge clk); #1;
    chk(rx_valid[9] && rx_valid[14], "all delivered");
    chk(order.size() == 3 && order[0] == 3 && order[1] == 9 && order[2] == 14, "round-robin order");
    foreach (order[i]) begin
      automatic int p = order[i];
      chk(rx_prs[p] == pat(p, 0), "prs intact"); chk(rx_pws[p] == pat(p, 1), "pws intact"); chk(rx_rb[p] == P'(p * 3 + 1), $sformatf("rb intact %h", rx_rb[p]));
    end
    // core 3 sends again: buffer full, must wait for release
    tx_prs[3] = pat(3, 5); tx_valid[3] = 1;
    repeat (10) @(posedge clk); #1;
    chk(tx_valid[3] && rx_prs[3] == pat(3, 0), "held while buffer full");
    rx_release[3] = 1; @(posedge clk); #1; rx_release = '0;
    chk(!rx_valid[3], "released");
    repeat (BEATS + 5) @(posedge clk); #1;
    chk(rx_valid[3] && rx_prs[3] == pat(3, 5), "second message after release");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
