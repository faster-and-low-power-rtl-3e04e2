// rca: W-bit ripple carry adder (RCA).
//
// The multiplier uses plain ripple carry adders in three places: as the
// final adder inside each N/2-bit sub-multiplier, as the N-bit adder that
// sums the two middle products P2 + P3, and as the N+1-bit adder that adds
// that sum to the overlapping bits of P1 and P4. The paper names the adder
// type; the cell chain below is the textbook form of it.
//
// Interface: a, b (W bits), ci (carry in) -> s (W bits), co (carry out).
// Combinational; the carry ripples through W full adders from bit 0 up.
module rca #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         ci,
  output logic [W-1:0] s,
  output logic         co
);
  logic [W:0] c;
  assign c[0] = ci;

  for (genvar i = 0; i < W; i++) begin : g_bit
    full_adder u_fa (
      .a (a[i]),
      .b (b[i]),
      .ci(c[i]),
      .s (s[i]),
      .co(c[i+1])
    );
  end

  assign co = c[W];
endmodule
