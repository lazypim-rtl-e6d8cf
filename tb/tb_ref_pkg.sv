// tb_ref_pkg -- reference models shared by the LazyPIM testbenches.
//
// ref_idx recomputes the H3 hashed value of a line address for one segment
// straight from the matrix formula (row q(s,i) = low hash_w bits of the
// splitmix64 finaliser of 64*s + i + 1), without using the RTL.
// ref_member tests a signature held as a bit array.
package tb_ref_pkg;
  function automatic int unsigned ref_idx(longint unsigned line, int unsigned seg,
                                          int unsigned hash_w, int unsigned addr_w);
    longint unsigned acc, q, k;
    acc = 0;
    k = 64'h9E3779B97F4A7C15;
    for (int unsigned i = 0; i < addr_w; i++) begin
      if (((line >> i) & 1) != 0) begin
        q = (longint'(seg) * 64 + longint'(i) + 1) * k;
        q = (q ^ (q >> 30)) * 64'hBF58476D1CE4E5B9;
        q = (q ^ (q >> 27)) * 64'h94D049BB133111EB;
        q = q ^ (q >> 31);
        acc = acc ^ (q & ((64'd1 << hash_w) - 1));
      end
    end
    return int'(acc);
  endfunction

  function automatic longint unsigned rand_line(int unsigned addr_w);
    longint unsigned v;
    v = {$urandom(), $urandom()};
    return v & ((64'd1 << addr_w) - 1);
  endfunction
endpackage
