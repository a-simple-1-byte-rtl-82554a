// rc4_pkg: sizes and types shared by the RC4 coprocessor.
//
// RC4 works on a permutation S of the 256 byte values; every index and
// every sum (i, j, t) is taken modulo 256, which in hardware is simply the
// natural wrap of an 8-bit adder. The S-box size and the byte width are
// therefore fixed by the cipher and are constants here, not parameters.
// The secret key holds 1 to KEY_MAX bytes; RC4 keys are typically 5 to 16
// bytes long, so KEY_MAX is 16 (a choice of this design: the cipher itself
// allows up to 256).
package rc4_pkg;

  localparam int unsigned SBOX_N  = 256;             // entries of S and of K
  localparam int unsigned BYTE_W  = 8;               // width of an entry
  localparam int unsigned KEY_MAX = 16;              // longest secret key, bytes
  localparam int unsigned KLEN_W  = $clog2(KEY_MAX + 1);

  typedef logic [BYTE_W-1:0]           byte_t;       // one S-box entry / key byte
  typedef logic [$clog2(SBOX_N)-1:0]   idx_t;        // i, j, t (mod 256)
  typedef logic [KLEN_W-1:0]           klen_t;       // key length l
  typedef logic [KEY_MAX-1:0][BYTE_W-1:0] key_t;     // key[0] is the first byte

  // Number of swap clocks of the key schedule (one per S-box entry).
  localparam int unsigned KSA_SWAPS = SBOX_N;

endpackage
