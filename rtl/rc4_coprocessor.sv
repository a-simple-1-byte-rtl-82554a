// rc4_coprocessor: RC4 key stream coprocessor, one byte per clock.
//
// What it does: generates the RC4 key stream for a secret key of 1..16
// bytes. The main processor loads the key and pulses start; 257 clocks later
// (one initial clock and 256 swaps of the key schedule) prga_en rises, and
// from then on every clock with z_req high returns one key stream byte z,
// acknowledged by z_valid. The processor XORs z with its text; the same key
// stream encrypts on one side of a link and decrypts on the other. For a
// key and n bytes the coprocessor needs 257 + (1 + n) clocks.
//
// How it works: one storage block (the S-box with its swap MUX/DEMUX) is
// shared by the KSA unit and the PRGA unit; prga_en, kept by the mode
// control, decides which of the two drives it. Each unit computes i and j on
// the falling edge of its clock and the storage block swaps S[i] and S[j] on
// the rising edge, which is what fits a whole RC4 step into one clock. The
// clock gating block stops the KSA clock while prga_en is 1 and the PRGA
// clock while it is 0 (GATING = 0 leaves both running).
//
// Interface (all synchronous to clk; drive inputs after a rising edge):
//   start    one clock or more; the key schedule begins on the last rising
//            edge with start high; key and key_len are sampled there;
//   z_req    level; sampled on falling edges; the PRGA steps each clock it
//            is high once prga_en is 1;
//   z        valid in the clock after a rising edge with z_valid high.
// rst_n is an asynchronous active-low reset of the control state.
//
// From the paper: the units, the shared S-box, prga_en, the gated clocks
// and the clock counts. This design's own choices: the start/z_req/z_valid
// handshake with the processor and the reset.
module rc4_coprocessor
  import rc4_pkg::*;
#(
  parameter bit GATING = 1'b1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  key_t  key,
  input  klen_t key_len,
  input  logic  z_req,
  output byte_t z,
  output logic  z_valid,
  output logic  prga_en,       // key schedule done, key stream available
  output logic  ksa_busy
);

  logic  ksa_clk, prga_clk, ksa_en, prga_fresh, ksa_finish;
  idx_t  ksa_i, ksa_j, ksa_rd_addr, prga_i, prga_j, prga_rd_addr, t_addr;
  logic  ksa_swap, prga_swap, prga_z_valid;
  byte_t ksa_rd_data, prga_rd_data, s_i, s_j, s_t;

  rc4_clock_gating #(.GATING(GATING)) u_cg (
    .clk      (clk),
    .prga_en  (prga_en),
    .ksa_en   (ksa_en),
    .ksa_clk  (ksa_clk),
    .prga_clk (prga_clk)
  );

  rc4_mode_ctrl u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .ksa_finish (ksa_finish),
    .prga_en    (prga_en),
    .prga_fresh (prga_fresh)
  );

  ksa_unit u_ksa (
    .clk     (ksa_clk),
    .rst_n   (rst_n),
    .start   (start),
    .key     (key),
    .key_len (key_len),
    .i       (ksa_i),
    .j       (ksa_j),
    .swap    (ksa_swap),
    .rd_addr (ksa_rd_addr),
    .rd_data (ksa_rd_data),
    .busy    (ksa_busy),
    .finish  (ksa_finish)
  );

  storage_block u_sbox (
    .clk          (clk),
    .init         (start),
    .sel          (prga_en),
    .ksa_i        (ksa_i),
    .ksa_j        (ksa_j),
    .ksa_swap     (ksa_swap),
    .ksa_rd_addr  (ksa_rd_addr),
    .ksa_rd_data  (ksa_rd_data),
    .prga_i       (prga_i),
    .prga_j       (prga_j),
    .prga_swap    (prga_swap),
    .prga_rd_addr (prga_rd_addr),
    .prga_rd_data (prga_rd_data),
    .s_i          (s_i),
    .s_j          (s_j),
    .t_addr       (t_addr),
    .s_t          (s_t)
  );

  prga_unit u_prga (
    .clk     (prga_clk),
    .rst_n   (rst_n),
    .en      (prga_en),
    .fresh   (prga_fresh),
    .req     (z_req),
    .i       (prga_i),
    .j       (prga_j),
    .swap    (prga_swap),
    .rd_addr (prga_rd_addr),
    .rd_data (prga_rd_data),
    .s_i     (s_i),
    .s_j     (s_j),
    .t_addr  (t_addr),
    .s_t     (s_t),
    .z       (z),
    .z_valid (prga_z_valid)
  );

  // A PRGA clock stopped by the gating keeps its last z_valid; mask it.
  assign z_valid = prga_z_valid && prga_en;

  // Only one unit may swap in a clock, and the S-box changes hands only
  // when the key schedule has just finished.
  assert property (@(posedge clk) disable iff (!rst_n) !(ksa_swap && prga_swap))
    else $error("rc4_coprocessor: KSA and PRGA swap in the same clock");
  assert property (@(negedge clk) disable iff (!rst_n) $rose(prga_en) |-> $past(ksa_finish))
    else $error("rc4_coprocessor: prga_en rose before the key schedule ended");

endmodule
