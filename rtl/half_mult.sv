// half_mult: unsigned M x M multiplier, one of the four sub-multipliers
// (M1..M4) from which the N-bit multiplier is built, with M = N/2.
//
// Three stages, as in any column compression multiplier: an AND-gate array
// forms the M*M partial products pp[i][j] = a[i] & b[j]; hpm_tree reduces
// them to two rows; a 2M-bit ripple carry adder adds the two rows into the
// product. The stage split and the use of an AND array and a ripple carry
// final adder follow the paper; the tree's wiring is this design's own
// (see hpm_tree).
//
// Interface: a (multiplier), b (multiplicand), both M bits, -> p = a * b
// (2M bits). Combinational.
module half_mult #(
  parameter int unsigned M = 16
) (
  input  logic [M-1:0]   a,
  input  logic [M-1:0]   b,
  output logic [2*M-1:0] p
);
  logic [M-1:0][M-1:0] pp;
  logic [2*M-1:0]      row0, row1;
  logic                co_unused;

  // Partial product generation: one AND gate per operand bit pair.
  for (genvar i = 0; i < M; i++) begin : g_row
    for (genvar j = 0; j < M; j++) begin : g_col
      assign pp[i][j] = a[i] & b[j];
    end
  end

  hpm_tree #(.M(M)) u_tree (
    .pp  (pp),
    .row0(row0),
    .row1(row1)
  );

  // Final adder. The product of two M-bit numbers fits 2M bits, so the
  // carry out is always zero and is left unconnected.
  rca #(.W(2 * M)) u_final (
    .a (row0),
    .b (row1),
    .ci(1'b0),
    .s (p),
    .co(co_unused)
  );
endmodule
