// cpu_write_set -- the processor-side CPUWriteSet signature.
//
// Holds REGS signature registers of N bits, each a parallel Bloom filter with
// M segments of the same width as PIMReadSet/PIMWriteSet, so each register can
// be intersected with them directly.  Every inserted address (a CPU write to
// the PIM data region, or a dirty PIM-region line found by the tag-store scan
// at the start of a partial kernel) goes to one register picked round robin.
// A membership test checks all registers.  This follows the paper; the round
// robin pointer advancing on every insertion and resetting on clear is this
// design's reading of "round robin selection".
//
// Timing: ins/clr take effect at the clock edge; test_hit is combinational;
// regs is the registered contents for the intersection logic.
module cpu_write_set
  import lazypim_pkg::*;
#(
  parameter int unsigned N      = SIG_BITS,
  parameter int unsigned M      = SIG_M,
  parameter int unsigned REGS   = CWS_REGS,
  parameter int unsigned ADDR_W = LINE_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clr,
  input  logic                      ins,
  input  logic [ADDR_W-1:0]         ins_addr,
  input  logic [ADDR_W-1:0]         test_addr,
  output logic                      test_hit,
  output logic [REGS-1:0][N-1:0]    regs,
  output logic [$clog2(REGS+1)-1:0] rr_ptr_o
);
  localparam int unsigned SEG    = N / M;
  localparam int unsigned HASH_W = $clog2(SEG);
  localparam int unsigned PTR_W  = (REGS > 1) ? $clog2(REGS) : 1;

  logic [M-1:0][HASH_W-1:0] ins_idx, tst_idx;
  logic [N-1:0]             ins_mask;
  logic [PTR_W-1:0]         rr;

  h3_hash #(.ADDR_W(ADDR_W), .M(M), .HASH_W(HASH_W)) u_hi (.addr(ins_addr),  .idx(ins_idx));
  h3_hash #(.ADDR_W(ADDR_W), .M(M), .HASH_W(HASH_W)) u_ht (.addr(test_addr), .idx(tst_idx));

  // one-hot masks of the two addresses (one bit per segment)
  logic [N-1:0] tst_mask;
  always_comb begin
    for (int s = 0; s < M; s++) begin
      ins_mask[s*SEG +: SEG] = SEG'(1) << ins_idx[s];
      tst_mask[s*SEG +: SEG] = SEG'(1) << tst_idx[s];
    end
    test_hit = 1'b0;
    for (int r = 0; r < REGS; r++) begin
      logic h;
      h = 1'b1;
      for (int s = 0; s < M; s++) h &= |(regs[r][s*SEG +: SEG] & tst_mask[s*SEG +: SEG]);
      test_hit |= h;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   rr <= '0;
    else if (clr) rr <= '0;
    else if (ins) rr <= (int'(rr) == REGS - 1) ? '0 : rr + 1'b1;
  end

  // one small register per entry, gathered into the packed output
  for (genvar r = 0; r < REGS; r++) begin : g_reg
    logic [N-1:0] q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                     q <= '0;
      else if (clr)                   q <= '0;
      else if (ins && int'(rr) == r)  q <= q | ins_mask;
    end
    assign regs[r] = q;
  end

  assign rr_ptr_o = ($clog2(REGS+1))'(rr);
endmodule
