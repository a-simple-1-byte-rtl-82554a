// tb_ksa_unit: the key schedule, run on a real storage block.
//
// For keys of every length 1..16 (random bytes) plus two fixed ones, pulses
// start, checks that finish rises exactly 256 rising edges after the start
// edge (so the schedule occupies 257 clocks) and that busy covers that
// span, then reads the whole S-box back and compares it with the software
// KSA. One run is interrupted by a second start half way through, which must
// restart the schedule from the new key.
`timescale 1ns/1ps
module tb_ksa_unit;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  key_t  key = '0;
  klen_t key_len = klen_t'(5);
  idx_t  ksa_i, ksa_j, ksa_rd_addr, rd_addr;
  logic  ksa_swap, busy, finish;
  byte_t ksa_rd_data, rd_data, s_i, s_j, s_t;

  int checks = 0, failures = 0;
  rc4_ref ref_m = new();

  ksa_unit dut (
    .clk (clk), .rst_n (rst_n), .start (start), .key (key), .key_len (key_len),
    .i (ksa_i), .j (ksa_j), .swap (ksa_swap), .rd_addr (ksa_rd_addr),
    .rd_data (ksa_rd_data), .busy (busy), .finish (finish)
  );

  storage_block u_sb (
    .clk (clk), .init (start), .sel (1'b0),
    .ksa_i (ksa_i), .ksa_j (ksa_j), .ksa_swap (ksa_swap),
    .ksa_rd_addr (ksa_rd_addr), .ksa_rd_data (ksa_rd_data),
    .prga_i ('0), .prga_j ('0), .prga_swap (1'b0),
    .prga_rd_addr (rd_addr), .prga_rd_data (rd_data),
    .s_i (s_i), .s_j (s_j), .t_addr ('0), .s_t (s_t)
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

  // One schedule: start on one edge, optionally interrupt, check timing and S.
  task automatic run_key(input key_t k, input int len, input int interrupt_at);
    int edges;
    bit seen;
    @(posedge clk); #1;
    key = k; key_len = klen_t'(len); start = 1'b1;
    @(posedge clk); #1 start = 1'b0;       // start edge = edge 0
    edges = 0;
    if (interrupt_at > 0) begin
      repeat (interrupt_at) @(posedge clk);
      #1 key = ~k; start = 1'b1;
      @(posedge clk); #1 start = 1'b0;
      k = ~k;
    end
    seen = 1'b0;
    while (!seen && edges < 300) begin
      check(busy == 1'b1, "busy during KSA");
      if (finish) seen = 1'b1;
      else begin
        @(posedge clk); #1;
        edges++;
      end
    end
    check(edges == 256, $sformatf("finish after %0d edges, expected 256", edges));
    @(negedge clk); #1;
    check(finish == 1'b0 && busy == 1'b0, "finish is one clock");
    ref_m.ksa(k, len);
    for (int n = 0; n < SBOX_N; n++) begin
      rd_addr = idx_t'(n); #0.1;
      check(rd_data == ref_m.s[n], $sformatf("S[%0d] after KSA", n));
    end
  endtask

  initial begin
    key_t k;
    rd_addr = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(busy == 1'b0 && finish == 1'b0, "idle after reset");
    run_key(str_key("Secret"), 6, 0);
    run_key(key_t'(128'h0504030201), 5, 0);
    for (int len = 1; len <= KEY_MAX; len++) begin
      for (int b = 0; b < KEY_MAX; b++) k[b] = byte_t'($urandom);
      run_key(k, len, (len == 9) ? 100 : 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
