// sig_intersect -- the signature intersection of the conflict-detection hardware.
//
// Takes the bitwise AND of one PIM signature (PIMReadSet or PIMWriteSet) with
// each CPUWriteSet register.  If any of the M segments of an intersection is
// empty, the two signatures share no address; otherwise they may (false
// positives included) and that register matches.  hit is the OR over all
// registers.  Purely combinational; follows the paper exactly.
module sig_intersect
  import lazypim_pkg::*;
#(
  parameter int unsigned N    = SIG_BITS,
  parameter int unsigned M    = SIG_M,
  parameter int unsigned REGS = CWS_REGS
) (
  input  logic [N-1:0]             pim_sig,
  input  logic [REGS-1:0][N-1:0]   cws,
  output logic [REGS-1:0]          reg_hit,
  output logic                     hit
);
  localparam int unsigned SEG = N / M;
  always_comb begin
    for (int r = 0; r < REGS; r++) begin
      logic [N-1:0] x;
      x = pim_sig & cws[r];
      reg_hit[r] = 1'b1;
      for (int s = 0; s < M; s++) reg_hit[r] &= |x[s*SEG +: SEG];
    end
    hit = |reg_hit;
  end
endmodule
