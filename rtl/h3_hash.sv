// h3_hash -- H3 hash of a cache-line address, one hashed value per segment.
//
// Each of the M segments of a parallel Bloom filter uses its own H3 function:
// out[s] = XOR over the set address bits i of q(s,i), where q(s,i) is a fixed
// HASH_W-bit row (lazypim_pkg::h3_row).  The block is purely combinational
// (an AND-XOR tree per output bit).  The use of H3 and of one hash per segment
// follow the paper; the matrix values are this design's own.
//
// Interface: addr (line address) in, idx[M] (bit index within each segment) out.
module h3_hash
  import lazypim_pkg::*;
#(
  parameter int unsigned ADDR_W = LINE_W,
  parameter int unsigned M      = SIG_M,
  parameter int unsigned HASH_W = $clog2(SIG_BITS / SIG_M)
) (
  input  logic [ADDR_W-1:0]         addr,
  output logic [M-1:0][HASH_W-1:0]  idx
);
  always_comb begin
    for (int s = 0; s < M; s++) begin
      idx[s] = '0;
      for (int i = 0; i < ADDR_W; i++)
        if (addr[i]) idx[s] ^= HASH_W'(h3_row(s, i, HASH_W));
    end
  end
endmodule
