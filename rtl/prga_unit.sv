// prga_unit: the RC4 key stream generator, one byte per clock.
//
// What it does: after the key schedule, each clock in which the main
// processor requests a byte yields one key stream byte Z:
//   * falling edge: the MOD 256 up counter advances i (1, 2, ..., 255, 0, ...)
//     and the 2-input adder gives j = (j + S[i]) % 256, with S[i] read from
//     the S-box through rd_addr/rd_data; i, j and the swap request are
//     registered, and the storage block holds S[i] and S[j];
//   * rising edge: the storage block swaps S[i] and S[j], and Z = S[t] with
//     t = (S[i] + S[j]) % 256 is registered here, with z_valid high.
// The rising edge of the first clock (fresh high) sets j = 0 and i = 0;
// with the request held high the first byte appears on the next rising edge,
// so n bytes take n + 1 clocks. When req is low on a falling edge the unit
// holds i and j and the next rising edge produces nothing (a stall: the
// processor waits for its acknowledge, z_valid).
//
// Interface: clk is the (possibly gated) PRGA clock; en is prga_en; req is
// sampled on falling edges; z and z_valid change on rising edges and stay
// for a whole clock.
//
// From the paper: the counter starting at 1, the 2-input j adder, j in a D
// flip-flop, the swap through the storage block, the t adder and MUX3,
// Z_1 on the rising edge of the second clock, n + 1 clocks for n bytes.
// This design's own choices: the req/z_valid handshake (the paper's "request
// for Z" and acknowledge from the processor, without a signal-level
// definition), the j = 0 initialisation done by selecting 0 as the adder's j
// operand after the fresh clock, the registered Z, and the reset.
module prga_unit
  import rc4_pkg::*;
(
  input  logic  clk,           // PRGA clock (prga_clk)
  input  logic  rst_n,
  input  logic  en,            // prga_en
  input  logic  fresh,         // this rising edge is the first PRGA clock
  input  logic  req,           // request for Z

  // to/from the storage block (PRGA port)
  output idx_t  i,
  output idx_t  j,
  output logic  swap,
  output idx_t  rd_addr,
  input  byte_t rd_data,
  input  byte_t s_i,
  input  byte_t s_j,
  output idx_t  t_addr,
  input  byte_t s_t,

  output byte_t z,
  output logic  z_valid
);

  logic init_p;                // the last rising edge was the fresh clock
  logic step;                  // a swap is pending for the next rising edge
  idx_t base_i, base_j, nxt_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) init_p <= 1'b0;
    else        init_p <= fresh;
  end

  // MOD 256 counter and the 2-input adder.
  assign base_i  = init_p ? '0 : i;
  assign base_j  = init_p ? '0 : j;
  assign nxt_i   = base_i + 1'b1;
  assign rd_addr = nxt_i;

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i    <= '0;
      j    <= '0;
      step <= 1'b0;
    end else if (req && en) begin
      i    <= nxt_i;
      j    <= base_j + rd_data;
      step <= 1'b1;
    end else begin
      i    <= base_i;
      j    <= base_j;
      step <= 1'b0;
    end
  end

  assign swap   = step && en && !fresh;
  assign t_addr = s_i + s_j;   // (S[i] + S[j]) % 256

  // Z register (MUX3 output) and its acknowledge.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z       <= '0;
      z_valid <= 1'b0;
    end else begin
      z_valid <= swap;
      if (swap) z <= s_t;
    end
  end

endmodule
