// tb_rc4_coprocessor_nogate: the coprocessor with clock gating turned off.
//
// With GATING = 0 the KSA and PRGA clocks both run all the time and the
// units rely on prga_en alone. One board: the published "Secret" vector,
// then 600 bytes with random stalls and a re-key in the middle of the
// stream, every byte compared with the software RC4 stream, and the clock
// count of the first key (257 + (1 + n)) checked as in the gated design.
`timescale 1ns/1ps
module tb_rc4_coprocessor_nogate;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0, start = 1'b0, z_req = 1'b0;
  key_t  key = '0;
  klen_t key_len = klen_t'(6);
  byte_t z;
  logic  z_valid, prga_en, ksa_busy;
  int checks = 0, failures = 0, stalls = 0;
  rc4_ref ref_m = new();

  rc4_coprocessor #(.GATING(1'b0)) dut (.*);

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

  task automatic new_key(input key_t k, input int len);
    #1 key = k; key_len = klen_t'(len); start = 1'b1; z_req = 1'b1;
    @(posedge clk); #1 start = 1'b0;
    ref_m.ksa(k, len);
  endtask

  // Requests n bytes; returns them; stall_pct of the clocks are left idle.
  task automatic take(input int n, input int stall_pct, input bit timing, output byte_t q [$]);
    int edges = 0;
    q = {};
    while (q.size() < n) begin
      @(posedge clk); #1;
      edges++;
      if (z_valid) begin
        q.push_back(z);
        if (timing) check(edges == 257 + q.size(), "clock count");
      end
      z_req = (q.size() < n) && ($urandom % 100 >= stall_pct);
      if (!z_req && prga_en && q.size() < n) stalls++;
    end
    z_req = 1'b0;
  endtask

  initial begin
    byte_t q [$], exp [$];
    string msg = "Attack at dawn";
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);
    new_key(str_key("Secret"), 6);
    take(14, 0, 1'b1, q);
    exp = {8'h45, 8'hA0, 8'h1F, 8'h64, 8'h5F, 8'hC3, 8'h5B, 8'h38,
           8'h35, 8'h52, 8'h54, 8'h4B, 8'h9B, 8'hF5};
    for (int n = 0; n < 14; n++) begin
      check((q[n] ^ byte_t'(msg[n])) == exp[n], "Secret vector");
      check(q[n] == ref_m.next(), "Secret key stream");
    end
    new_key(key_t'({$urandom, $urandom, $urandom, $urandom}), 16);
    take(300, 25, 1'b0, q);
    foreach (q[n]) check(q[n] == ref_m.next(), "stream 1");
    new_key(key_t'({$urandom, $urandom}), 7);      // re-key while running
    take(300, 25, 1'b0, q);
    foreach (q[n]) check(q[n] == ref_m.next(), "stream 2");
    check(stalls > 0, "stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
