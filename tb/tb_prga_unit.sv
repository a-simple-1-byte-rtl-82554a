// tb_prga_unit: the key stream generator, run on a real storage block.
//
// The S-box is first scrambled with random swaps through the KSA port, so
// the PRGA starts from a permutation that is not the identity; a software
// RC4 PRGA starts from the same permutation. Then, with sel = prga_en = 1:
//   * req held high from the first PRGA clock: z_valid must be high on
//     rising edges 1..n after the fresh edge, so n bytes take n + 1 clocks;
//   * 600 bytes in total, so i wraps past 255;
//   * req toggled at random (stalls): every acknowledged byte must still be
//     the next byte of the software stream, and the number of bytes must
//     equal the number of clocks with req high.
`timescale 1ns/1ps
module tb_prga_unit;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0, en = 1'b0, fresh = 1'b0, req = 1'b0;
  logic  sel = 1'b0, init = 1'b0, k_swap = 1'b0;
  idx_t  k_i = '0, k_j = '0;
  idx_t  p_i, p_j, p_rd_addr, t_addr, k_rd_addr = '0;
  logic  p_swap, z_valid;
  byte_t p_rd_data, k_rd_data, s_i, s_j, s_t, z;

  int checks = 0, failures = 0;
  int stalls = 0, reqs = 0, got = 0;
  rc4_ref ref_m = new();
  byte_t perm [SBOX_N];

  prga_unit dut (
    .clk (clk), .rst_n (rst_n), .en (en), .fresh (fresh), .req (req),
    .i (p_i), .j (p_j), .swap (p_swap), .rd_addr (p_rd_addr), .rd_data (p_rd_data),
    .s_i (s_i), .s_j (s_j), .t_addr (t_addr), .s_t (s_t), .z (z), .z_valid (z_valid)
  );

  storage_block u_sb (
    .clk (clk), .init (init), .sel (sel),
    .ksa_i (k_i), .ksa_j (k_j), .ksa_swap (k_swap),
    .ksa_rd_addr (k_rd_addr), .ksa_rd_data (k_rd_data),
    .prga_i (p_i), .prga_j (p_j), .prga_swap (p_swap),
    .prga_rd_addr (p_rd_addr), .prga_rd_data (p_rd_data),
    .s_i (s_i), .s_j (s_j), .t_addr (t_addr), .s_t (s_t)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Every acknowledged byte is compared with the software stream.
  always @(posedge clk) begin
    #2;
    if (z_valid && en) begin
      check(z == ref_m.next(), $sformatf("Z byte %0d", got + 1));
      got++;
    end
  end

  initial begin
    byte_t tmp;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1; init = 1'b1;
    @(posedge clk); #1 init = 1'b0;
    for (int n = 0; n < SBOX_N; n++) perm[n] = byte_t'(n);
    // Scramble through the KSA port.
    for (int c = 0; c < 400; c++) begin
      @(negedge clk); #1;
      k_i = idx_t'($urandom); k_j = idx_t'($urandom); k_swap = 1'b1;
      tmp = perm[k_i]; perm[k_i] = perm[k_j]; perm[k_j] = tmp;
    end
    @(negedge clk); #1 k_swap = 1'b0;
    ref_m.set_state(perm);

    // Hand over to the PRGA: fresh for one clock, request from the start.
    @(negedge clk); #1 sel = 1'b1; en = 1'b1; fresh = 1'b1; req = 1'b1;
    @(posedge clk); // phi0 rising edge: j = 0
    #1 check(z_valid == 1'b0, "no byte on the first PRGA edge");
    @(negedge clk); #1 fresh = 1'b0;
    for (int n = 1; n <= 100; n++) begin
      @(posedge clk); #1;
      check(z_valid == 1'b1, $sformatf("byte %0d on edge %0d", n, n));
    end
    // 500 more bytes with random stalls.
    reqs = 100;
    while (reqs < 600) begin
      req = ($urandom % 3) != 0;
      @(negedge clk);
      if (req) reqs++; else stalls++;
      @(posedge clk); #1;
      check(z_valid == req, "z_valid follows req");
    end
    req = 1'b0;
    repeat (3) @(posedge clk);
    #3;
    check(got == 600, $sformatf("got %0d bytes, expected 600", got));
    check(stalls > 0, "stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
