// Reference model functions for the testbenches: an independent software
// version of the H3 hashes (splitmix64 mask rows, parity of masked bits) and
// of the partial-key alternative bucket. Only the seeds are shared with the
// design, so a wrong mask, bit order or XOR in the hardware shows up as a
// mismatch.
package tb_ref_pkg;

  function automatic longint unsigned mix(longint unsigned seed, int unsigned row);
    longint unsigned z;
    z = seed + longint'(row + 1) * 64'h9E3779B97F4A7C15;
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    return z ^ (z >> 31);
  endfunction

  // H3 hash of the low in_w bits of x onto out_w bits.
  function automatic longint unsigned h3(longint unsigned x, int in_w, int out_w, longint unsigned seed);
    longint unsigned r = 0;
    longint unsigned m;
    int p;
    for (int i = 0; i < out_w; i++) begin
      m = mix(seed, i);
      p = 0;
      for (int k = 0; k < in_w; k++) if (x[k] && m[k]) p ^= 1;
      if (p != 0) r |= (64'd1 << i);
    end
    return r;
  endfunction

  function automatic longint unsigned ref_fp(longint unsigned a, int addr_w, int fp_w);
    return h3(a, addr_w, fp_w, 64'h0123456789ABCDEF);
  endfunction

  function automatic longint unsigned ref_h1(longint unsigned a, int addr_w, int idx_w);
    return h3(a, addr_w, idx_w, 64'h2545F4914F6CDD1D);
  endfunction

  function automatic longint unsigned ref_alt(longint unsigned idx, longint unsigned fp, int fp_w, int idx_w);
    return idx ^ h3(fp, fp_w, idx_w, 64'h9E6C63D0676A9A99);
  endfunction

  function automatic longint unsigned rand64();
    return {$urandom, $urandom};
  endfunction

endpackage
