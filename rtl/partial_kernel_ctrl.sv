// partial_kernel_ctrl -- decides when a PIM core's partial kernel ends.
//
// A partial kernel is stopped for commit when (a) the PIMReadSet or the
// PIMWriteSet holds its maximum number of addresses (the two 8-bit address
// counters live in the signatures and arrive here as rs_full/ws_full), (b) the
// 20-bit instruction counter reaches INSN_LIMIT retired instructions, (c) the
// L1 has to evict a speculative line, (d) the core reaches a synchronization
// primitive, or (e) the kernel ends.  All five causes are from the paper.
// The instruction counter counts retire pulses while run is high and is
// cleared by restart (start of the next partial kernel, after commit or
// rollback).  stop is combinational; cause records which reasons held, for
// statistics (this encoding is this design's own).
module partial_kernel_ctrl
  import lazypim_pkg::*;
#(
  parameter int unsigned INSN_MAX = INSN_LIMIT,
  parameter int unsigned ICNT_W   = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,          // partial kernel executing
  input  logic              restart,      // next partial kernel begins
  input  logic              retire,       // one instruction retired
  input  logic              rs_full,
  input  logic              ws_full,
  input  logic              spec_evict,
  input  logic              sync_prim,
  input  logic              kernel_end,
  output logic              stop,
  output logic [4:0]        cause,        // {end, sync, evict, insn, sigfull}
  output logic [ICNT_W-1:0] insn_count
);
  logic insn_cap;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       insn_count <= '0;
    else if (restart)                 insn_count <= '0;
    else if (run && retire && !insn_cap) insn_count <= insn_count + 1'b1;
  end

  assign insn_cap = (insn_count >= ICNT_W'(INSN_MAX));
  assign cause    = {kernel_end, sync_prim, spec_evict, insn_cap, rs_full | ws_full};
  assign stop     = run && (|cause);
endmodule
