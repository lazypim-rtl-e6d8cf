// bloom_signature -- one LazyPIM signature register (PIMReadSet or PIMWriteSet).
//
// A fixed-length parallel Bloom filter: the N-bit register is cut into M
// segments of N/M bits, and inserting a line address sets, in every segment,
// the bit chosen by that segment's H3 hash.  A membership test reports true
// when the chosen bit is set in all M segments (no false negatives, some false
// positives).  Bits stay set until clear.  An 8-bit counter counts insertions
// of addresses that were not already present; full is raised when it reaches
// MAX_ADDRS so the owner can end the partial kernel.  All of that follows the
// paper.  Counting only new addresses, and the exact clear/insert priority
// (clear wins), are this design's choices.
//
// Timing: ins and clr act at the clock edge; test_hit is combinational on
// test_addr; sig, count and full are registered.
module bloom_signature
  import lazypim_pkg::*;
#(
  parameter int unsigned N         = SIG_BITS,
  parameter int unsigned M         = SIG_M,
  parameter int unsigned ADDR_W    = LINE_W,
  parameter int unsigned MAX_ADDRS = SIG_MAX_ADDRS,
  parameter int unsigned CNT_W     = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              ins,
  input  logic [ADDR_W-1:0] ins_addr,
  input  logic [ADDR_W-1:0] test_addr,
  output logic              test_hit,
  output logic [N-1:0]      sig,
  output logic [CNT_W-1:0]  count,
  output logic              full
);
  localparam int unsigned SEG    = N / M;
  localparam int unsigned HASH_W = $clog2(SEG);

  logic [M-1:0][HASH_W-1:0] ins_idx, tst_idx;
  logic [N-1:0]             ins_mask;
  logic                     ins_present;

  h3_hash #(.ADDR_W(ADDR_W), .M(M), .HASH_W(HASH_W)) u_hi (.addr(ins_addr),  .idx(ins_idx));
  h3_hash #(.ADDR_W(ADDR_W), .M(M), .HASH_W(HASH_W)) u_ht (.addr(test_addr), .idx(tst_idx));

  always_comb begin
    ins_mask    = '0;
    ins_present = 1'b1;
    test_hit    = 1'b1;
    for (int s = 0; s < M; s++) begin
      ins_mask[s*SEG + int'(ins_idx[s])] = 1'b1;
      ins_present &= sig[s*SEG + int'(ins_idx[s])];
      test_hit    &= sig[s*SEG + int'(tst_idx[s])];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sig   <= '0;
      count <= '0;
    end else if (clr) begin
      sig   <= '0;
      count <= '0;
    end else if (ins) begin
      sig <= sig | ins_mask;
      if (!ins_present && count != '1) count <= count + 1'b1;
    end
  end

  assign full = (count >= CNT_W'(MAX_ADDRS));
endmodule
