// rc4_ref_pkg: a plain software model of RC4 for the testbenches.
//
// rc4_ref follows the textbook algorithm line by line (KSA, then PRGA with
// i = i + 1, j = j + S[i], swap, Z = S[S[i] + S[j]]), with no knowledge of
// the hardware's timing. set_state() lets a test start the PRGA from any
// permutation.
package rc4_ref_pkg;
  import rc4_pkg::*;

  class rc4_ref;
    byte_t s [SBOX_N];
    idx_t  i, j;

    function void ksa(key_t key, int len);
      idx_t  jj;
      byte_t tmp;
      for (int n = 0; n < SBOX_N; n++) s[n] = byte_t'(n);
      jj = '0;
      for (int n = 0; n < SBOX_N; n++) begin
        jj = jj + s[n] + key[n % len];
        tmp = s[n]; s[n] = s[jj]; s[jj] = tmp;
      end
      i = '0;
      j = '0;
    endfunction

    function void set_state(const ref byte_t perm [SBOX_N]);
      for (int n = 0; n < SBOX_N; n++) s[n] = perm[n];
      i = '0;
      j = '0;
    endfunction

    function byte_t next();
      byte_t tmp;
      i = i + 1'b1;
      j = j + s[i];
      tmp = s[i]; s[i] = s[j]; s[j] = tmp;
      return s[idx_t'(s[i] + s[j])];
    endfunction
  endclass

  // Packs a string into a key_t (first character into key[0]).
  function automatic key_t str_key(string k);
    key_t r = '0;
    for (int n = 0; n < k.len() && n < KEY_MAX; n++) r[n] = k[n];
    return r;
  endfunction

endpackage
