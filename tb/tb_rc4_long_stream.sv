// tb_rc4_long_stream: full-length key streams, as used for randomness tests.
//
// A statistical test suite run on RC4 takes, per key, a sequence of
// 1,342,400 bits = 167,800 key stream bytes. This test generates that many
// bytes for three keys (lengths 5, 10 and 16) on the coprocessor at its
// default parameters, with the request held high, and compares every byte
// with the software RC4 model. It also checks the clock count of each key:
// 257 + (1 + 167,800) clocks from the start edge to the last byte.
`timescale 1ns/1ps
module tb_rc4_long_stream;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  localparam int unsigned BYTES = 1342400 / 8;

  logic  clk = 1'b0, rst_n = 1'b0, start = 1'b0, z_req = 1'b0;
  key_t  key = '0;
  klen_t key_len = klen_t'(5);
  byte_t z;
  logic  z_valid, prga_en, ksa_busy;
  int checks = 0, failures = 0;
  longint ones = 0;
  rc4_ref ref_m = new();

  rc4_coprocessor dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (3 * (BYTES + 400)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lens [3] = '{5, 10, 16};
    int got, edges, bad;
    key_t k;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    foreach (lens[s]) begin
      for (int b = 0; b < KEY_MAX; b++) k[b] = byte_t'($urandom);
      @(posedge clk);
      #1 key = k; key_len = klen_t'(lens[s]); start = 1'b1; z_req = 1'b1;
      @(posedge clk); #1 start = 1'b0;
      ref_m.ksa(k, lens[s]);
      got = 0; edges = 0; bad = 0;
      while (got < BYTES) begin
        @(posedge clk); #1;
        edges++;
        if (z_valid) begin
          if (z != ref_m.next()) bad++;
          ones += $countones(z);
          got++;
          if (got == BYTES) z_req = 1'b0;
        end
      end
      check(bad == 0, $sformatf("key %0d: %0d wrong bytes of %0d", s, bad, BYTES));
      check(edges == 257 + BYTES, $sformatf("key %0d: %0d clocks after start, expected %0d",
                                            s, edges, 257 + BYTES));
    end
    $display("%0d bytes per key; fraction of one bits %f", BYTES,
             real'(ones) / (3.0 * 8.0 * BYTES));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
