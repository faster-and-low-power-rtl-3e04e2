// clock_gate: gates the clock with one enable, so that the registers it
// drives hold their value (and the logic behind them stays quiet) while
// the enable is low.
//
// The paper gates the clock with an AND of the clock and a decoder output.
// A bare AND gives a clipped or extra clock pulse if the enable changes
// while the clock is high, so this design puts a latch in front of the
// AND, transparent while the clock is low: the usual integrated
// clock-gating cell. The latch is therefore intended, and a tool's latch
// warning on en_l is expected.
//
// Interface: clk, en -> gclk. gclk = clk & (en as sampled at the last
// falling clock edge). The enable must settle before the rising edge it
// is meant to pass or block.
module clock_gate (
  input  logic clk,
  input  logic en,
  output logic gclk
);
  logic en_l;

  always_latch begin
    if (!clk) en_l = en;
  end

  assign gclk = clk & en_l;
endmodule
