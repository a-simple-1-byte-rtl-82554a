// tb_rc4_clock_gating: the two gated clocks.
//
// Changes prga_en only while clk is low (as the mode control does) and
// checks, at every quarter period, ksa_en = not prga_en, ksa_clk = clk and
// ksa_en, prga_clk = clk and prga_en. It counts the rising edges of each
// gated clock and checks them against the clocks spent in each mode, so a
// gated clock that runs in the wrong phase, or not at all, is caught.
`timescale 1ns/1ps
module tb_rc4_clock_gating;
  logic clk = 1'b0, prga_en = 1'b0;
  logic ksa_en, ksa_clk, prga_clk;
  int checks = 0, failures = 0;
  int ksa_edges = 0, prga_edges = 0, ksa_cycles = 0, prga_cycles = 0;

  rc4_clock_gating dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge ksa_clk)  ksa_edges++;
  always @(posedge prga_clk) prga_edges++;

  initial begin
    for (int c = 0; c < 1000; c++) begin
      // clk low: the enable may change here
      if ((c % 37) == 0) prga_en = ~prga_en;
      #2.5;
      check(ksa_en == !prga_en && ksa_clk == 1'b0 && prga_clk == 1'b0, "low phase");
      #2.5 clk = 1'b1;
      if (prga_en) prga_cycles++; else ksa_cycles++;
      #2.5;
      check(ksa_clk == ksa_en && prga_clk == prga_en, "high phase");
      #2.5 clk = 1'b0;
    end
    #1;
    check(ksa_edges == ksa_cycles, $sformatf("ksa_clk edges %0d, expected %0d", ksa_edges, ksa_cycles));
    check(prga_edges == prga_cycles, $sformatf("prga_clk edges %0d, expected %0d", prga_edges, prga_cycles));
    check(ksa_cycles > 0 && prga_cycles > 0, "both modes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
