// ksa_unit: the RC4 key scheduling algorithm, one swap per clock.
//
// What it does: on the rising edge where start is high it fills the K array
// with the key repeated, K[n] = key[n % key_len] for n = 0..255 (the S-box
// loads its identity permutation on the same edge, driven by the same start).
// Then it drives the shared storage block for 256 swaps:
//   * falling edge: the one-round MOD 256 up counter gives i (0, 1, ..., 255)
//     and the 3-input adder gives j = (j + S[i] + K[i]) % 256, with S[i] read
//     from the S-box through rd_addr/rd_data and K[i] chosen by MUX1 from the
//     K array; i, j and swap are registered;
//   * rising edge: the storage block swaps S[i] and S[j].
// So the schedule takes one initial clock and 256 swap clocks, 257 in all.
// On the falling edge that ends the 257th clock, finish is high for the
// mode control, which then hands the S-box to the PRGA.
//
// Interface: clk is the (possibly gated) KSA clock. start and key/key_len are
// sampled on a rising edge; key_len must be 1..KEY_MAX. A new start restarts
// the schedule at any time.
//
// From the paper: the one-round counter, the K array with its 256:1 MUX1,
// the 3-input adder, j in a D flip-flop, one initial clock plus 256 clocks.
// This design's own choices: the start input, the j = 0 initialisation done
// by selecting 0 as the adder's j operand right after the initial clock (the
// j register changes on falling edges only), the look-ahead read port, the
// asynchronous active-low reset of the control registers, and the finish
// strobe. The K array is filled with a modulo per entry; n is a constant in
// each, so it is a small table per entry indexed by key_len.
module ksa_unit
  import rc4_pkg::*;
(
  input  logic  clk,           // KSA clock (ksa_clk)
  input  logic  rst_n,
  input  logic  start,
  input  key_t  key,
  input  klen_t key_len,

  // to/from the storage block (KSA port)
  output idx_t  i,
  output idx_t  j,
  output logic  swap,
  output idx_t  rd_addr,
  input  byte_t rd_data,

  output logic  busy,          // a schedule is in progress
  output logic  finish         // high on the falling edge that ends the KSA
);

  byte_t k_arr [SBOX_N];       // K[256]
  logic  init_p;               // the last rising edge was the initial clock
  logic  step;                 // a swap is pending for the next rising edge
  localparam int unsigned CNT_W = $clog2(SBOX_N) + 1;
  logic [CNT_W-1:0] cnt;       // swaps issued so far, 0..256

  idx_t  nxt_i, base_j;
  byte_t k_i;
  klen_t klen;

  // Guard against a zero or oversized length (checked by the assertion).
  assign klen = (key_len == '0 || key_len > klen_t'(KEY_MAX)) ? klen_t'(1) : key_len;

  // Initial clock: K array fill.
  always_ff @(posedge clk) begin
    if (start) begin
      for (int n = 0; n < SBOX_N; n++) k_arr[n] <= key[n % int'(klen)];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) init_p <= 1'b0;
    else        init_p <= start;
  end

  // One-round MOD 256 counter and the 3-input adder.
  assign nxt_i   = init_p ? '0 : idx_t'(cnt);
  assign base_j  = init_p ? '0 : j;
  assign rd_addr = nxt_i;
  assign k_i     = k_arr[nxt_i];          // MUX1

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i    <= '0;
      j    <= '0;
      cnt  <= '0;
      step <= 1'b0;
    end else if (init_p) begin
      i    <= nxt_i;
      j    <= base_j + rd_data + k_i;
      cnt  <= 1;
      step <= 1'b1;
    end else if (step && cnt != CNT_W'(KSA_SWAPS)) begin
      i    <= nxt_i;
      j    <= base_j + rd_data + k_i;
      cnt  <= cnt + 1'b1;
    end else begin
      step <= 1'b0;
    end
  end

  // A start on this rising edge overrides a pending swap.
  assign swap   = step && !start;
  assign finish = step && cnt == CNT_W'(KSA_SWAPS) && !init_p;
  assign busy   = step || init_p;

  assert property (@(posedge clk) start |-> (key_len != '0 && key_len <= klen_t'(KEY_MAX)))
    else $error("ksa_unit: key_len out of range");

endmodule
