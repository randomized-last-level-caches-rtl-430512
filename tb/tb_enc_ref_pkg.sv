// tb_enc_ref_pkg: reference model of the index encryptor for testbenches.
//
// An independent restatement of the keyed Feistel permutation used for the
// set index: LA-bit line address split in halves L (high) and R (low); for
// each round r: (L, R) <- (R, L xor ((R xor K_r) + rotl(R,3) xor rotl(R,7))).
// Written with plain integer arithmetic on 64-bit values.
package tb_enc_ref_pkg;
  function automatic longint unsigned rotl_ref(longint unsigned x, int n, int h);
    longint unsigned mask = (64'd1 << h) - 1;
    return ((x << n) | (x >> (h - n))) & mask;
  endfunction

  function automatic longint unsigned enc_ref(longint unsigned addr, longint unsigned key,
                                              int la, int rounds, int idx_w);
    int h = la / 2;
    longint unsigned mask = (64'd1 << h) - 1;
    longint unsigned l = (addr >> h) & mask;
    longint unsigned r = addr & mask;
    for (int k = 0; k < rounds; k++) begin
      longint unsigned kr = (key >> (k * h)) & mask;
      longint unsigned f  = ((((r ^ kr) + rotl_ref(r, 3, h)) & mask) ^ rotl_ref(r, 7, h));
      longint unsigned t  = r;
      r = l ^ f;
      l = t;
    end
    return r & ((64'd1 << idx_w) - 1);
  endfunction
endpackage
