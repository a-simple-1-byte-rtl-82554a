// tb_storage_block: checks the S-box swap engine on its own.
//
// Loads the identity, then for many clocks drives random i/j/swap on either
// port (sel random) and compares, against a software copy of S:
//   * s_i / s_j after each falling edge (the held values),
//   * the read ports of both units,
//   * s_t, which must equal S[t] after the pending swap,
//   * the whole bank, read back through the read ports, at the end.
// One swap per clock is also checked: every clock with swap high must change
// S exactly as one swap does.
`timescale 1ns/1ps
module tb_storage_block;
  import rc4_pkg::*;

  logic  clk = 1'b0;
  logic  init, sel, ksa_swap, prga_swap;
  idx_t  ksa_i, ksa_j, prga_i, prga_j, ksa_rd_addr, prga_rd_addr, t_addr;
  byte_t ksa_rd_data, prga_rd_data, s_i, s_j, s_t;

  int checks = 0, failures = 0;
  byte_t model [SBOX_N];

  storage_block dut (.*);

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

  initial begin
    byte_t tmp;
    idx_t  wi, wj;
    init = 1'b0; sel = 1'b0; ksa_swap = 1'b0; prga_swap = 1'b0;
    ksa_i = '0; ksa_j = '0; prga_i = '0; prga_j = '0;
    ksa_rd_addr = '0; prga_rd_addr = '0; t_addr = '0;

    // Identity load.
    @(posedge clk); #1 init = 1'b1;
    @(posedge clk); #1 init = 1'b0;
    for (int n = 0; n < SBOX_N; n++) model[n] = byte_t'(n);

    for (int c = 0; c < 3000; c++) begin
      // Inputs change after the falling edge, as the units drive them.
      @(negedge clk); #1;
      sel       = 1'($urandom);
      ksa_i     = idx_t'($urandom); ksa_j  = idx_t'($urandom);
      prga_i    = idx_t'($urandom); prga_j = idx_t'($urandom);
      if (c % 7 == 0) ksa_j = ksa_i;          // i == j corner
      if (c % 11 == 0) prga_j = prga_i;
      ksa_swap  = ($urandom % 4) != 0;
      prga_swap = ($urandom % 4) != 0;
      ksa_rd_addr  = idx_t'($urandom);
      prga_rd_addr = idx_t'($urandom);
      wi = sel ? prga_i : ksa_i;
      wj = sel ? prga_j : ksa_j;
      case (c % 3)
        0: t_addr = wi;
        1: t_addr = wj;
        default: t_addr = idx_t'($urandom);
      endcase
      #1;
      check(s_i == model[wi], "s_i");
      check(s_j == model[wj], "s_j");
      check(ksa_rd_data == model[ksa_rd_addr], "ksa read port");
      check(prga_rd_data == model[prga_rd_addr], "prga read port");
      if (sel ? prga_swap : ksa_swap) begin
        tmp = model[wi]; model[wi] = model[wj]; model[wj] = tmp;
      end
      check(s_t == model[t_addr], "s_t forwarding");
    end
    @(negedge clk); #1 ksa_swap = 1'b0; prga_swap = 1'b0;
    @(negedge clk); #1;
    for (int n = 0; n < SBOX_N; n++) begin
      ksa_rd_addr = idx_t'(n); #1;
      check(ksa_rd_data == model[n], "final bank");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
