// storage_block: the RC4 S-box with its swap machinery.
//
// What it does: holds the 256-byte permutation S and swaps S[i] and S[j] in
// one clock, using both edges of that clock:
//   * falling edge: every entry of the register bank is copied into a bank of
//     256 D flip-flops (one 8-bit hold register per entry); the dual-select
//     MUX then presents hold[i] and hold[j] as s_i and s_j;
//   * rising edge: the dual-select DEMUX writes s_j into S[i] and s_i into
//     S[j] when a swap is requested, or loads the identity permutation
//     S[n] = n when init is high.
// The block is shared by the two RC4 units: sel = 0 gives the i/j/swap
// inputs of the key schedule (KSA) port, sel = 1 those of the key stream
// (PRGA) port. Each unit also has its own combinational read port
// (*_rd_addr -> *_rd_data) into the register bank, used on the falling edge
// to feed its j adder with the freshly updated S[i]. A third read port
// (t_addr -> s_t) is the key stream multiplexer: it returns the value S[t]
// will hold once the pending swap is written, so the PRGA can register Z on
// the same rising edge as the swap.
//
// Timing: inputs i, j and swap must be stable from the falling edge to the
// next rising edge (the units change them on the falling edge). s_i and s_j
// are valid from a falling edge until the next one. rd_data and s_t are
// combinational.
//
// From the paper: the register bank of 256 bytes, the 256 hold D flip-flops
// between the bank and the MUX, read on the falling edge and swap-write on
// the rising edge, the crossed MUX->DEMUX wiring (S[i] out -> S[j] in and
// vice versa), the two port pairs of KSA and PRGA and the third MUX for Z.
// This design's own choices: the identity load on init in one clock, the
// sel input choosing the active port pair, the separate combinational read
// ports for the j adders, and the forwarding on the Z port. No reset: the
// bank is loaded by init before it is used.
module storage_block
  import rc4_pkg::*;
(
  input  logic  clk,
  input  logic  init,          // rising edge: S[n] <= n
  input  logic  sel,           // 0: KSA port, 1: PRGA port

  // KSA port (MUX0/DEMUX0)
  input  idx_t  ksa_i,
  input  idx_t  ksa_j,
  input  logic  ksa_swap,
  input  idx_t  ksa_rd_addr,
  output byte_t ksa_rd_data,

  // PRGA port (MUX2/DEMUX2)
  input  idx_t  prga_i,
  input  idx_t  prga_j,
  input  logic  prga_swap,
  input  idx_t  prga_rd_addr,
  output byte_t prga_rd_data,

  // Held S[i], S[j] of the selected port (dual-select MUX outputs)
  output byte_t s_i,
  output byte_t s_j,

  // Key stream MUX (MUX3): S[t] after the pending swap
  input  idx_t  t_addr,
  output byte_t s_t
);

  byte_t bank [SBOX_N];        // the S-box register bank
  byte_t hold [SBOX_N];        // 256 D flip-flops, falling edge

  idx_t sw_i, sw_j;
  logic swap;

  // Port selection between the KSA and PRGA combinations.
  always_comb begin
    sw_i = sel ? prga_i    : ksa_i;
    sw_j = sel ? prga_j    : ksa_j;
    swap = sel ? prga_swap : ksa_swap;
  end

  // Falling edge: read the whole bank into the hold registers.
  always_ff @(negedge clk) begin
    for (int n = 0; n < SBOX_N; n++) hold[n] <= bank[n];
  end

  // Dual-select MUX.
  assign s_i = hold[sw_i];
  assign s_j = hold[sw_j];

  // Rising edge: dual-select DEMUX, crossed for the swap.
  always_ff @(posedge clk) begin
    if (init) begin
      for (int n = 0; n < SBOX_N; n++) bank[n] <= byte_t'(n);
    end else if (swap) begin
      bank[sw_i] <= s_j;
      bank[sw_j] <= s_i;
    end
  end

  // Read ports for the j adders (falling-edge look-up of the current S).
  assign ksa_rd_data  = bank[ksa_rd_addr];
  assign prga_rd_data = bank[prga_rd_addr];

  // MUX3 with forwarding of the swap being written.
  always_comb begin
    if (swap && t_addr == sw_i)      s_t = s_j;
    else if (swap && t_addr == sw_j) s_t = s_i;
    else                             s_t = hold[t_addr];
  end

  // A swap and the identity load never share a rising edge.
  assert property (@(posedge clk) !(init && swap))
    else $error("storage_block: init and swap on the same clock");

endmodule
