// sig_link -- off-chip transfer of PIM signatures to the processor.
//
// At the end of a partial kernel each PIM core sends its PIMReadSet, its
// PIMWriteSet and its speculative read bits to the processor as one batched
// message.  This block models that path: the P senders share one link of
// LINK_W bits per cycle.  A round-robin arbiter picks a sender whose receive
// buffer at the processor is free, latches its message (tx_ready pulses for
// one cycle), and shifts it out in ceil(MSG_W/LINK_W) beats; at the processor
// the beats are shifted into a receive register and, after the last beat, the
// message lands in that core's buffer and rx_valid[p] rises.  The processor
// drops it with rx_release[p].  Sending the signatures back in one batch is
// the paper's; the link width, the arbitration and the per-core buffers are
// this design's own (the paper gives no link width).
//
// Latency: a message accepted in cycle t is visible in rx_* from cycle
// t + BEATS + 1.  link_valid/link_data show the beats on the wire.
module sig_link
  import lazypim_pkg::*;
#(
  parameter int unsigned P      = NPIM,
  parameter int unsigned N      = SIG_BITS,
  parameter int unsigned LINK_W = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [P-1:0]          tx_valid,
  input  logic [P-1:0][N-1:0]   tx_prs,
  input  logic [P-1:0][N-1:0]   tx_pws,
  input  logic [P-1:0][P-1:0]   tx_rb,
  output logic [P-1:0]          tx_ready,
  output logic                  link_valid,
  output logic [LINK_W-1:0]     link_data,
  output logic [P-1:0]          rx_valid,
  output logic [P-1:0][N-1:0]   rx_prs,
  output logic [P-1:0][N-1:0]   rx_pws,
  output logic [P-1:0][P-1:0]   rx_rb,
  input  logic [P-1:0]          rx_release
);
  localparam int unsigned MSG_W  = 2 * N + P;
  localparam int unsigned BEATS  = (MSG_W + LINK_W - 1) / LINK_W;
  localparam int unsigned PAD_W  = BEATS * LINK_W;
  localparam int unsigned PID_W  = (P > 1) ? $clog2(P) : 1;
  localparam int unsigned BEAT_W = $clog2(BEATS + 1);

  logic [PAD_W-1:0]  tx_sh, rx_sh;
  logic [PID_W-1:0]  cur, rr, rx_dst;
  logic [BEAT_W-1:0] beat;
  logic              busy, rx_last;
  logic [P-1:0]      pending;           // buffer reserved for a message in flight

  // round-robin choice among senders whose buffer is free
  logic             gnt_ok;
  logic [PID_W-1:0] gnt;
  always_comb begin
    gnt_ok = 1'b0; gnt = '0;
    for (int k = P - 1; k >= 0; k--) begin
      int unsigned c;
      c = (int'(rr) + k) % P;
      if (tx_valid[c] && !rx_valid[c] && !pending[c]) begin gnt_ok = 1'b1; gnt = PID_W'(c); end
    end
  end

  always_comb begin
    tx_ready = '0;
    if (!busy && gnt_ok) tx_ready[gnt] = 1'b1;
  end

  assign link_valid = busy;
  assign link_data  = tx_sh[LINK_W-1:0];

  // per-core receive buffers, one small register each
  for (genvar p = 0; p < P; p++) begin : g_rx
    logic [N-1:0] prs_q, pws_q;
    logic [P-1:0] rb_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin prs_q <= '0; pws_q <= '0; rb_q <= '0; end
      else if (rx_last && int'(rx_dst) == p) begin
        prs_q <= rx_sh[N-1:0]; pws_q <= rx_sh[2*N-1:N]; rb_q <= rx_sh[2*N +: P];
      end
    end
    assign rx_prs[p] = prs_q;
    assign rx_pws[p] = pws_q;
    assign rx_rb[p]  = rb_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_sh <= '0; rx_sh <= '0; cur <= '0; rx_dst <= '0; rr <= '0; beat <= '0;
      busy <= 1'b0; rx_last <= 1'b0; pending <= '0; rx_valid <= '0;
    end else begin
      rx_last <= 1'b0;
      rx_valid <= rx_valid & ~rx_release;
      if (!busy) begin
        if (gnt_ok) begin
          tx_sh <= PAD_W'({tx_rb[gnt], tx_pws[gnt], tx_prs[gnt]});
          cur   <= gnt;
          rr    <= (int'(gnt) == P - 1) ? '0 : gnt + 1'b1;
          beat  <= '0;
          busy  <= 1'b1;
          pending[gnt] <= 1'b1;
        end
      end else begin
        // one beat per cycle, least significant first
        tx_sh <= tx_sh >> LINK_W;
        rx_sh <= {link_data, rx_sh[PAD_W-1:LINK_W]};
        beat  <= beat + 1'b1;
        if (int'(beat) == BEATS - 1) begin busy <= 1'b0; rx_last <= 1'b1; rx_dst <= cur; end
      end
      if (rx_last) begin
        rx_valid[rx_dst] <= 1'b1;
        pending[rx_dst] <= 1'b0;
      end
    end
  end
endmodule
