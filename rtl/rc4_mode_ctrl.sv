// rc4_mode_ctrl: hands the S-box from the key schedule to the key stream.
//
// What it does: keeps prga_en, the mode bit of the coprocessor. prga_en is
// 0 after reset and after every start, so the KSA owns the S-box (and, with
// clock gating, only the KSA clock runs). On the falling edge that ends the
// 257th KSA clock (ksa_finish) it becomes 1: the PRGA owns the S-box and its
// clock starts. prga_fresh is high for exactly one clock after that switch,
// telling the PRGA that its next rising edge is its first one.
//
// Timing: both registers change on the falling edge of the main clock, i.e.
// while the clock is low. The gated clocks derived from prga_en therefore
// never see a shortened pulse.
//
// From the paper: prga_en starts at 0, becomes 1 after the 257 KSA clocks and
// selects which block is active. This design's own choices: the falling-edge
// update, the prga_fresh strobe, and start clearing prga_en for a new key.
module rc4_mode_ctrl (
  input  logic clk,            // main clock
  input  logic rst_n,
  input  logic start,          // new key: back to the KSA
  input  logic ksa_finish,     // last KSA falling edge
  output logic prga_en,
  output logic prga_fresh
);

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prga_en    <= 1'b0;
      prga_fresh <= 1'b0;
    end else if (start) begin
      prga_en    <= 1'b0;
      prga_fresh <= 1'b0;
    end else if (ksa_finish && !prga_en) begin
      prga_en    <= 1'b1;
      prga_fresh <= 1'b1;
    end else begin
      prga_fresh <= 1'b0;
    end
  end

endmodule
