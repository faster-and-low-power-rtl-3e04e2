// half_reg: W-bit (N/2 in the multiplier) operand register. The eight of
// them, two per sub-multiplier, replace the two N-bit input registers of
// an ungated design, so that each sub-multiplier's operands can be frozen
// by gating that register pair's clock.
//
// Interface: gclk (gated clock), rst_n (asynchronous, active low; a reset
// is this design's addition), d -> q. q takes d at each rising gclk edge.
module half_reg #(
  parameter int unsigned W = 16
) (
  input  logic         gclk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  always_ff @(posedge gclk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else        q <= d;
  end
endmodule
