// out_reg: the 2N-bit product register at the multiplier's output, clocked
// by the ungated clock so that every cycle's result is captured, whatever
// the mode.
//
// Interface: clk, rst_n (asynchronous, active low; a reset is this
// design's addition), d -> q, one cycle of latency.
module out_reg #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else        q <= d;
  end
endmodule
