// tb_loft_ref_pkg: reference models shared by the LOFT testbenches, written
// independently of the RTL (64-bit integer arithmetic instead of 32-bit
// wrap-around).
package tb_loft_ref_pkg;
  function automatic longint unsigned ref_fmix(longint unsigned v);
    longint unsigned h;
    h = v & 64'hFFFF_FFFF;
    h = h ^ (h / 65536);
    h = (h * 64'h85EBCA6B) % 64'h1_0000_0000;
    h = h ^ (h / 8192);
    h = (h * 64'hC2B2AE35) % 64'h1_0000_0000;
    h = h ^ (h / 65536);
    return h;
  endfunction
  // H_{j,k}(f) with seed {jg,k}, reduced to idx_w bits
  function automatic int unsigned ref_idx(int unsigned jg, int unsigned k, longint unsigned f, int unsigned idx_w);
    longint unsigned s;
    s = (longint'(jg) % 65536) * 65536 + longint'(k) % 65536;
    return int'(ref_fmix(f ^ ((s * 64'h9E3779B1) % 64'h1_0000_0000)) % (64'd1 << idx_w));
  endfunction
endpackage
