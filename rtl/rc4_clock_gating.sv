// rc4_clock_gating: separate gated clocks for the KSA and the PRGA.
//
// What it does: the KSA and the PRGA of RC4 never work at the same time, so
// each gets a clock that runs only while it is active:
//   ksa_en   = not prga_en
//   ksa_clk  = clk while ksa_en,  held low otherwise
//   prga_clk = clk while prga_en, held low otherwise
// With GATING = 0 both outputs are the main clock (the ungated arrangement in
// which both clocks run all the time); the blocks then rely on their own
// enables.
//
// Timing: prga_en must change only while clk is low (rc4_mode_ctrl updates it
// on the falling edge). A plain AND of clk and the enable is then free of
// glitches and runt pulses, so no latch-based gating cell is needed; on an
// FPGA this maps to a clock-enable buffer.
//
// From the paper: ksa_en derived from prga_en so that ksa_en is '1' while
// prga_en is '0', and the two clocks running only in their own phase. This
// design's own choices: the AND form of the gate (the paper names no cell),
// and the GATING parameter.
module rc4_clock_gating #(
  parameter bit GATING = 1'b1
) (
  input  logic clk,            // main clock
  input  logic prga_en,
  output logic ksa_en,
  output logic ksa_clk,
  output logic prga_clk
);

  assign ksa_en = !prga_en;

  if (GATING) begin : g_gated
    assign ksa_clk  = clk & ksa_en;
    assign prga_clk = clk & prga_en;
  end else begin : g_free
    assign ksa_clk  = clk;
    assign prga_clk = clk;
  end

endmodule
