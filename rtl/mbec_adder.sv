// mbec_adder: recombines the four sub-products into the N x N product.
//
// With the operands split in halves, a = aH:aL and b = bH:bL, the four
// sub-multipliers give P1 = aL*bL, P2 = aL*bH, P3 = aH*bL and P4 = aH*bH,
// each N bits, and the product is
//     P = P4 * 2^N + (P2 + P3) * 2^(N/2) + P1.
// The bits are aligned as follows (H = N/2):
//   P[H-1:0]      = P1[H-1:0]                      (nothing adds to them)
//   PS[N:0]       = P2 + P3                        (N-bit RCA, carry out is PS[N])
//   {c, P[N+H:H]} = {P4[H:0], P1[N-1:H]} + PS      (N+1-bit RCA)
//   P[2N-1:N+H+1] = c ? P4[N-1:H+1] + 1 : P4[N-1:H+1]
// The last line is the hybrid part of the final adder: the H-1 top bits of
// P4 meet no other operand, only the carry c, so both candidate results
// are ready early, one straight from P4 and one from a Binary to Excess-1
// Converter (BEC), and c only drives a multiplexer. This is the structure
// and bit split of the paper's architecture figure and product alignment
// figure.
//
// Interface: p1..p4 (N bits each) -> p (2N bits). Combinational. N must be
// even and at least 4.
module mbec_adder #(
  parameter int unsigned N = 32
) (
  input  logic [N-1:0]   p1,
  input  logic [N-1:0]   p2,
  input  logic [N-1:0]   p3,
  input  logic [N-1:0]   p4,
  output logic [2*N-1:0] p
);
  localparam int unsigned H = N / 2;

  logic [N:0]   ps;      // P2 + P3
  logic [N:0]   mid;     // P[N+H:H]
  logic         carry;   // carry out of the N+1-bit adder, the mux select
  logic [H-2:0] par;     // P4[N-1:H+1] + 1, from the BEC

  rca #(.W(N)) u_rca_mid (
    .a (p2),
    .b (p3),
    .ci(1'b0),
    .s (ps[N-1:0]),
    .co(ps[N])
  );

  rca #(.W(N + 1)) u_rca_join (
    .a ({p4[H:0], p1[N-1:H]}),
    .b (ps),
    .ci(1'b0),
    .s (mid),
    .co(carry)
  );

  bec #(.W(H - 1)) u_bec (
    .b(p4[N-1:H+1]),
    .x(par)
  );

  // Carry-selected multiplexer for the top H-1 bits.
  always_comb begin
    p[H-1:0]     = p1[H-1:0];
    p[N+H:H]     = mid;
    p[2*N-1:N+H+1] = carry ? par : p4[N-1:H+1];
  end
endmodule
