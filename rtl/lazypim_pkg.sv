// lazypim_pkg -- constants, message types and the H3 hash matrix shared by the
// LazyPIM coherence blocks.
//
// LazyPIM lets PIM cores run kernels speculatively, recording every line they
// read and write in Bloom-filter signatures, and checks for conflicts with the
// processor only when a partial kernel ends.  The sizes below are the ones the
// design is presented with: 2 Kbit signatures in M = 4 segments, at most 250
// addresses per signature, a 1M-instruction cap per partial kernel, 16
// CPUWriteSet registers, 16 PIM cores, a 64 kB 4-way PIM L1 with 64 B lines,
// three rollbacks before the read set is locked, and a PIM dirty-block index of
// 1024 blocks (16 rows of 64) flushed every 800K processor cycles.
//
// This design's own choices: 48-bit physical addresses (so 42-bit line
// addresses), 64-bit words (8 per line; this matches the 1.6 % dirty-mask
// overhead quoted for the L1), and the H3 matrix rows, which are derived from
// a fixed multiplicative hash of (segment, bit) so that they are random-looking
// but reproducible: H3 row q(s,i) is the low HASH_W bits of the splitmix64
// finaliser applied to (s*64 + i + 1) (see h3_row).
package lazypim_pkg;

  // ---- address geometry (assumed) ----
  localparam int unsigned PADDR_W   = 48;
  localparam int unsigned LINE_OFS  = 6;                    // 64 B lines
  localparam int unsigned LINE_W    = PADDR_W - LINE_OFS;   // 42-bit line address
  localparam int unsigned WORD_W    = 64;
  localparam int unsigned WORDS     = 8;                    // words per line
  localparam int unsigned LINE_BITS = WORD_W * WORDS;       // 512

  // ---- signatures (paper) ----
  localparam int unsigned SIG_BITS  = 2048;                 // 2 Kbit register
  localparam int unsigned SIG_M     = 4;                    // segments
  localparam int unsigned SIG_MAX_ADDRS = 250;              // 30 % false positives
  localparam int unsigned CWS_REGS  = 16;                   // CPUWriteSet registers

  // ---- partial kernels (paper) ----
  localparam int unsigned INSN_LIMIT = 1_000_000;           // 20-bit counter
  localparam int unsigned ROLLBACK_LIMIT = 3;

  // ---- system (paper) ----
  localparam int unsigned NPIM      = 16;

  // ---- PIM L1 (paper, Table 1) ----
  localparam int unsigned L1_BYTES  = 65536;
  localparam int unsigned L1_WAYS   = 4;

  // ---- PIM-DBI (paper) ----
  localparam int unsigned DBI_ROWS      = 16;               // 1024 blocks / 64
  localparam int unsigned DBI_ROW_BLKS  = 64;
  localparam int unsigned DBI_TAG_W     = 48;
  localparam int unsigned DBI_INTERVAL  = 800_000;

  typedef logic [LINE_W-1:0] line_addr_t;

  // One H3 matrix row: the hashed value of segment s is the XOR of q(s,i) over
  // the set bits i of the line address.
  function automatic logic [31:0] h3_row(int unsigned s, int unsigned i, int unsigned hash_w);
    logic [63:0] z;
    z = (64'(s) * 64 + 64'(i) + 64'd1) * 64'h9E37_79B9_7F4A_7C15;
    z = (z ^ (z >> 30)) * 64'hBF58_476D_1CE4_E5B9;
    z = (z ^ (z >> 27)) * 64'h94D0_49BB_1331_11EB;
    z = z ^ (z >> 31);
    return 32'(z & ((64'd1 << hash_w) - 1));
  endfunction

  // Answer the processor gives a PIM core at the end of a partial kernel.
  typedef enum logic [1:0] {
    RESP_NONE     = 2'd0,
    RESP_COMMIT   = 2'd1,
    RESP_ROLLBACK = 2'd2
  } resp_e;

  // Processor cache walks requested by the conflict controller.
  typedef enum logic [1:0] {
    WALK_SCAN   = 2'd0,   // report dirty PIM-region lines (CPUWriteSet refill)
    WALK_FLUSH  = 2'd1,   // flush dirty lines matching a PIMReadSet
    WALK_COMMIT = 2'd2    // merge dirty / invalidate clean lines matching a PIMWriteSet
  } walk_e;

endpackage
