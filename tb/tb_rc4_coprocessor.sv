// tb_rc4_coprocessor: end-to-end run of the coprocessor, two boards.
//
// Two coprocessors at their default parameters stand for the sending and the
// receiving board. The host side of each is modelled here by tasks: it loads
// the key, pulses start, raises its request for Z, XORs each acknowledged
// byte with its text and (sender) puts the cipher text into a queue that
// stands for the UDP buffer and the LAN, or (receiver) takes it from there.
// Checks:
//   * the cipher text equals plain text XOR a software RC4 key stream, and
//     two published test vectors (key "Secret", and key 01 02 03 04 05);
//   * the receiver recovers the plain text;
//   * clock counts: with the request held, the n-th byte of a new key is
//     acknowledged on rising edge 257 + n after the start edge, i.e. a key
//     and n bytes take 257 + (1 + n) clocks, and prga_en rises after 257;
//   * one byte per clock while requested, none while not;
//   * the gated clocks: no KSA clock edge while prga_en is 1, no PRGA clock
//     edge while it is 0.
// Mechanisms counted, each must occur: key schedules, mode switches, stalls,
// i wrapping past 255, re-keying while the key stream runs, gated clocks.
`timescale 1ns/1ps
module tb_rc4_coprocessor;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  start [2];
  key_t  key [2];
  klen_t key_len [2];
  logic  z_req [2];
  byte_t z [2];
  logic  z_valid [2], prga_en [2], ksa_busy [2];

  int checks = 0, failures = 0;
  int n_ksa = 0, n_switch = 0, n_stall = 0, n_wrap = 0, n_rekey = 0;
  int n_ksa_gated = 0, n_prga_gated = 0;
  int bad_ksa_edges = 0, bad_prga_edges = 0;

  byte_t lan [$];              // cipher text in flight
  rc4_ref ref_m = new();

  rc4_coprocessor u_tx (
    .clk (clk), .rst_n (rst_n), .start (start[0]), .key (key[0]), .key_len (key_len[0]),
    .z_req (z_req[0]), .z (z[0]), .z_valid (z_valid[0]), .prga_en (prga_en[0]),
    .ksa_busy (ksa_busy[0])
  );
  rc4_coprocessor u_rx (
    .clk (clk), .rst_n (rst_n), .start (start[1]), .key (key[1]), .key_len (key_len[1]),
    .z_req (z_req[1]), .z (z[1]), .z_valid (z_valid[1]), .prga_en (prga_en[1]),
    .ksa_busy (ksa_busy[1])
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
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Gated clocks of the sending board.
  always @(posedge u_tx.ksa_clk)  if (u_tx.prga_en)  bad_ksa_edges++;
  always @(posedge u_tx.prga_clk) if (!u_tx.prga_en) bad_prga_edges++;
  always @(posedge clk) begin
    if (rst_n && u_tx.prga_en)  n_ksa_gated++;    // KSA clock held low
    if (rst_n && !u_tx.prga_en) n_prga_gated++;   // PRGA clock held low
  end
  logic prev_en = 1'b0;
  always @(posedge clk) begin
    if (prga_en[0] && !prev_en) n_switch++;
    prev_en <= prga_en[0];
  end

  // Pulse start with a key on both boards in the same clock. The sender's
  // request is raised together with start, so the timing of its first bytes
  // can be checked.
  task automatic load_key(input key_t k, input int len);
    if (prga_en[0]) n_rekey++;
    #1;
    for (int b = 0; b < 2; b++) begin
      key[b] = k; key_len[b] = klen_t'(len); start[b] = 1'b1;
    end
    z_req[0] = 1'b1;
    @(posedge clk); #1;                     // start edge
    start[0] = 1'b0; start[1] = 1'b0;
    n_ksa++;
  endtask

  // Host loop: request n bytes on board b, XOR them with text, return the
  // results. edge0 counts edges from the start edge when timing is checked.
  task automatic xor_stream(input int b, input byte_t text [$], input int stall_pct,
                            input bit check_timing, output byte_t out [$]);
    int edges = 0, got = 0, n = text.size();
    bit req_now;
    out = {};
    z_req[b] = 1'b1;
    while (got < n) begin
      @(posedge clk); #1;
      edges++;
      if (z_valid[b]) begin
        out.push_back(text[got] ^ z[b]);
        got++;
        if (check_timing)
          check(edges == 257 + got, $sformatf("byte %0d on edge %0d, expected %0d",
                                               got, edges, 257 + got));
      end else if (check_timing && prga_en[b]) begin
        check(edges == 257, $sformatf("no byte on edge %0d with request held", edges));
      end
      if (check_timing && edges == 256) check(prga_en[b] == 1'b0, "prga_en low for 257 clocks");
      if (check_timing && edges == 257) check(prga_en[b] == 1'b1, "prga_en high after 257 clocks");
      req_now = (got < n) && ($urandom % 100 >= stall_pct);
      if (got < n && prga_en[b] && !req_now) n_stall++;
      z_req[b] = req_now;
      if (!check_timing && got < n && !req_now) begin
        // A stalled clock must not produce a byte.
        @(posedge clk); #1;
        check(!z_valid[b], "no byte while not requested");
        z_req[b] = 1'b1;
      end
    end
    z_req[b] = 1'b0;
  endtask

  function automatic void str_bytes(input string s, output byte_t q [$]);
    q = {};
    for (int n = 0; n < s.len(); n++) q.push_back(byte_t'(s[n]));
  endfunction

  task automatic send_and_receive(input key_t k, input int len, input byte_t text [$],
                                  input int stall_pct, input bit fresh_key,
                                  output byte_t ct [$]);
    byte_t pt [$];
    if (fresh_key) begin
      load_key(k, len);
      ref_m.ksa(k, len);
    end
    xor_stream(0, text, stall_pct, fresh_key && stall_pct == 0, ct);
    for (int n = 0; n < ct.size(); n++) begin
      check(ct[n] == (text[n] ^ ref_m.next()), $sformatf("cipher byte %0d", n));
      lan.push_back(ct[n]);
    end
    xor_stream(1, lan, stall_pct, 1'b0, pt);
    lan = {};
    check(pt == text, "receiver recovers the plain text");
    if (text.size() > 255) n_wrap++;
  endtask

  initial begin
    byte_t text [$], ct [$], exp [$];
    key_t k;
    for (int b = 0; b < 2; b++) begin
      start[b] = 1'b0; key[b] = '0; key_len[b] = klen_t'(5); z_req[b] = 1'b0;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);

    // Published vector: key "Secret", "Attack at dawn".
    str_bytes("Attack at dawn", text);
    send_and_receive(str_key("Secret"), 6, text, 0, 1'b1, ct);
    exp = {8'h45, 8'hA0, 8'h1F, 8'h64, 8'h5F, 8'hC3, 8'h5B, 8'h38,
           8'h35, 8'h52, 8'h54, 8'h4B, 8'h9B, 8'hF5};
    check(ct == exp, "test vector Secret/Attack at dawn");

    // Published vector: key 01 02 03 04 05, first key stream bytes.
    text = {};
    for (int n = 0; n < 8; n++) text.push_back(8'h00);
    send_and_receive(key_t'(128'h0504030201), 5, text, 0, 1'b1, ct);
    exp = {8'hb2, 8'h39, 8'h63, 8'h05, 8'hf0, 8'h3d, 8'hc0, 8'h27};
    check(ct == exp, "test vector key 0102030405");

    // A 16-byte key, a long message with stalls (i wraps), then more text
    // on the same key stream.
    for (int b = 0; b < KEY_MAX; b++) k[b] = byte_t'($urandom);
    text = {};
    for (int n = 0; n < 700; n++) text.push_back(byte_t'($urandom));
    send_and_receive(k, 16, text, 0, 1'b1, ct);
    text = {};
    for (int n = 0; n < 300; n++) text.push_back(byte_t'($urandom));
    send_and_receive(k, 16, text, 30, 1'b0, ct);

    // Re-key while the key stream is running.
    for (int b = 0; b < KEY_MAX; b++) k[b] = byte_t'($urandom);
    text = {};
    for (int n = 0; n < 40; n++) text.push_back(byte_t'($urandom));
    send_and_receive(k, 9, text, 20, 1'b1, ct);

    check(bad_ksa_edges == 0, "no KSA clock edge in PRGA mode");
    check(bad_prga_edges == 0, "no PRGA clock edge in KSA mode");
    $display("mechanisms: ksa=%0d switch=%0d stall=%0d wrap=%0d rekey=%0d ksa_gated=%0d prga_gated=%0d",
             n_ksa, n_switch, n_stall, n_wrap, n_rekey, n_ksa_gated, n_prga_gated);
    check(n_ksa > 0, "key schedule exercised");
    check(n_switch > 0, "mode switch exercised");
    check(n_stall > 0, "stall exercised");
    check(n_wrap > 0, "i wrap exercised");
    check(n_rekey > 0, "re-key exercised");
    check(n_ksa_gated > 0 && n_prga_gated > 0, "clock gating exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
