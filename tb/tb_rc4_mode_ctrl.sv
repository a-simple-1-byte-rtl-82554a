// tb_rc4_mode_ctrl: the prga_en mode bit.
//
// Drives start and ksa_finish at random after falling edges and compares
// prga_en and prga_fresh after each falling edge with a small reference:
// start clears both; ksa_finish while prga_en is 0 sets both; prga_fresh
// lasts one clock. Also checks that both only change while clk is low.
`timescale 1ns/1ps
module tb_rc4_mode_ctrl;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, ksa_finish = 1'b0;
  logic prga_en, prga_fresh;
  logic m_en = 1'b0, m_fresh = 1'b0;
  int checks = 0, failures = 0, switches = 0;

  rc4_mode_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(prga_en or prga_fresh) if (rst_n) check(clk == 1'b0, "change while clk low");

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(prga_en == 1'b0 && prga_fresh == 1'b0, "reset value");
    for (int c = 0; c < 2000; c++) begin
      @(posedge clk); #1;
      start      = ($urandom % 16) == 0;
      ksa_finish = ($urandom % 5) == 0;
      @(negedge clk); #1;
      if (start) begin m_en = 1'b0; m_fresh = 1'b0; end
      else if (ksa_finish && !m_en) begin m_en = 1'b1; m_fresh = 1'b1; switches++; end
      else m_fresh = 1'b0;
      check(prga_en == m_en, "prga_en");
      check(prga_fresh == m_fresh, "prga_fresh");
    end
    check(switches > 0, "mode switch exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
