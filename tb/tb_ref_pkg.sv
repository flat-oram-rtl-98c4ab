// tb_ref_pkg: reference models used by the testbenches, written apart from
// the design's package so that a mistake in one shows up against the other.
// ref_prf is the keyed PRF (two splitmix64 finaliser rounds around the key);
// ref_pos, ref_ks and ref_mac derive positions, keystream words and the
// chained MAC from it exactly as the design documents them.
package tb_ref_pkg;
  function automatic longint unsigned ref_fmix(input longint unsigned x);
    longint unsigned z = x;
    z = z ^ (z >> 30); z = z * 64'hbf58476d1ce4e5b9;
    z = z ^ (z >> 27); z = z * 64'h94d049bb133111eb;
    return z ^ (z >> 31);
  endfunction

  function automatic longint unsigned ref_prf(input longint unsigned k,
                                              input longint unsigned x);
    longint unsigned swapped;
    swapped = (k << 32) | (k >> 32);
    return ref_fmix(ref_fmix(x ^ k) ^ swapped ^ 64'h9e3779b97f4a7c15);
  endfunction

  function automatic longint unsigned ref_pos(input longint unsigned k,
      input int unsigned id, input int unsigned c, input int unsigned aw);
    longint unsigned r;
    r = ref_prf(k ^ 64'h6a09e667f3bcc908, (longint'(id) << 32) | longint'(c));
    return r % (64'd1 << aw);
  endfunction

  function automatic longint unsigned ref_ks(input longint unsigned k,
      input longint unsigned iv, input int i);
    return ref_prf(k ^ 64'hbb67ae8584caa73b ^ longint'(i), iv);
  endfunction

  function automatic longint unsigned ref_mac(input longint unsigned k,
      input int unsigned id, input int unsigned c, input logic [1023:0] d);
    longint unsigned h, km;
    km = k ^ 64'h3c6ef372fe94f82b;
    h = ref_prf(km, (longint'(id) << 32) | longint'(c));
    for (int i = 0; i < 16; i++) h = ref_prf(km, h ^ d[i*64 +: 64]);
    return h;
  endfunction
endpackage
