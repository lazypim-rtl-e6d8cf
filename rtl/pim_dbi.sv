// pim_dbi -- dirty-block index for the PIM data region (PIM-DBI).
//
// Tracks which processor-cache lines of the PIM data region are dirty, in
// ROWS rows of BLKS blocks: a row holds a TAG_W-bit tag (the row address,
// i.e. the line address without its low log2(BLKS) bits) and a BLKS-bit dirty
// vector.  A processor write to the PIM region sets its block's bit (mark);
// a line written back or evicted by the cache clears it (clean).  A row whose
// dirty vector is empty is free.  A mark that finds neither its row nor a free
// row evicts a row round robin: its dirty lines are written back first, and
// mark_stall holds the write meanwhile, since a dirty line must always be
// tracked.  A cycle counter triggers the index every INTERVAL cycles: all
// tracked dirty lines are handed to the cache for write-back (wb_valid /
// wb_line / wb_ready, one line per accepted cycle), which removes dirty data
// that would otherwise cause dirty conflicts when a PIM kernel starts.
// Geometry (1024 blocks as 16 rows of 64, 64-bit dirty array, 48-bit tag) and
// the fixed-interval trigger (800K cycles) are from the paper; the row
// replacement and the stall on eviction are this design's own.  With 48-bit
// physical addresses the top 12 tag bits are always zero.
module pim_dbi
  import lazypim_pkg::*;
#(
  parameter int unsigned ROWS     = DBI_ROWS,
  parameter int unsigned BLKS     = DBI_ROW_BLKS,
  parameter int unsigned TAG_W    = DBI_TAG_W,
  parameter int unsigned INTERVAL = DBI_INTERVAL
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        mark_valid,
  input  line_addr_t  mark_line,
  output logic        mark_stall,
  input  logic        clean_valid,
  input  line_addr_t  clean_line,
  output logic        wb_valid,
  output line_addr_t  wb_line,
  input  logic        wb_ready,
  output logic        flushing,
  output logic [31:0] n_triggers,
  output logic [31:0] n_row_evictions
);
  localparam int unsigned BOFS_W = $clog2(BLKS);
  localparam int unsigned ROW_W  = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CNT_W  = $clog2(INTERVAL + 1);

  typedef enum logic [1:0] {D_IDLE, D_FLUSH, D_EVICT} dstate_e;
  dstate_e state;

  logic [TAG_W-1:0] tag_q   [ROWS];
  logic [BLKS-1:0]  dirty_q [ROWS];
  logic [CNT_W-1:0] cyc;
  logic [ROW_W-1:0] rr, ev_row;

  function automatic logic [TAG_W-1:0] row_tag(line_addr_t l);
    return TAG_W'(l >> BOFS_W);
  endfunction

  // row lookup for mark and clean
  logic             m_hit, m_free, c_hit;
  logic [ROW_W-1:0] m_row, f_row, c_row;
  always_comb begin
    m_hit = 1'b0; m_row = '0; m_free = 1'b0; f_row = '0; c_hit = 1'b0; c_row = '0;
    for (int r = ROWS - 1; r >= 0; r--) begin
      if (dirty_q[r] != '0 && tag_q[r] == row_tag(mark_line))  begin m_hit = 1'b1; m_row = ROW_W'(r); end
      if (dirty_q[r] == '0)                                     begin m_free = 1'b1; f_row = ROW_W'(r); end
      if (dirty_q[r] != '0 && tag_q[r] == row_tag(clean_line)) begin c_hit = 1'b1; c_row = ROW_W'(r); end
    end
  end

  // next dirty block to write back: whole index (flush) or one row (evict)
  logic              any_d;
  logic [ROW_W-1:0]  d_row;
  logic [BOFS_W-1:0] d_blk;
  always_comb begin
    any_d = 1'b0; d_row = '0; d_blk = '0;
    for (int r = ROWS - 1; r >= 0; r--)
      if ((state == D_FLUSH || ROW_W'(r) == ev_row) && dirty_q[r] != '0) begin
        any_d = 1'b1; d_row = ROW_W'(r);
      end
    for (int b = BLKS - 1; b >= 0; b--) if (dirty_q[d_row][b]) d_blk = BOFS_W'(b);
  end

  assign wb_valid   = (state != D_IDLE) && any_d;
  assign wb_line    = LINE_W'({tag_q[d_row], d_blk});
  assign flushing   = (state == D_FLUSH);
  assign mark_stall = mark_valid && (state == D_EVICT || (!m_hit && !m_free));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE; cyc <= '0; rr <= '0; ev_row <= '0;
      n_triggers <= '0; n_row_evictions <= '0;
      for (int r = 0; r < ROWS; r++) begin tag_q[r] <= '0; dirty_q[r] <= '0; end
    end else begin
      // clears first, so a mark in the same cycle wins
      if (clean_valid && c_hit) dirty_q[c_row][clean_line[BOFS_W-1:0]] <= 1'b0;
      if (wb_valid && wb_ready)  dirty_q[d_row][d_blk] <= 1'b0;
      if (mark_valid && !mark_stall) begin
        if (m_hit) dirty_q[m_row][mark_line[BOFS_W-1:0]] <= 1'b1;
        else begin
          tag_q[f_row]   <= row_tag(mark_line);
          dirty_q[f_row] <= BLKS'(1) << mark_line[BOFS_W-1:0];
        end
      end
      cyc <= (int'(cyc) >= INTERVAL - 1) ? '0 : cyc + 1'b1;
      unique case (state)
        D_IDLE: begin
          if (int'(cyc) >= INTERVAL - 1) begin
            state <= D_FLUSH; n_triggers <= n_triggers + 1;
          end else if (mark_valid && !m_hit && !m_free) begin
            state <= D_EVICT; ev_row <= rr;
            rr <= (int'(rr) == ROWS - 1) ? '0 : rr + 1'b1;
            n_row_evictions <= n_row_evictions + 1;
          end
        end
        D_FLUSH: if (!any_d) state <= D_IDLE;
        D_EVICT: if (!any_d) state <= D_IDLE;
        default: state <= D_IDLE;
      endcase
    end
  end
endmodule
