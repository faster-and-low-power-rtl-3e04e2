// bec: W-bit Binary to Excess-1 Converter (BEC).
//
// Outputs its input plus one, modulo 2^W. It takes the place of a W-bit
// ripple carry adder with its carry input tied to 1, and is used to
// precompute the upper bits of the product for the case that a carry
// arrives from the lower adder. Bit names follow the paper's 5-bit example
// (inputs b0..b4, outputs x0..x4): x0 is the inverse of b0, and each
// higher output xi is bi toggled when all lower input bits are 1, the
// all-ones test being a chain that grows by one bit per position.
//
// Interface: b (W bits) -> x (W bits). Combinational.
module bec #(
  parameter int unsigned W = 15
) (
  input  logic [W-1:0] b,
  output logic [W-1:0] x
);
  // ones[i] is high when b[i-1:0] are all ones (ones[0] is constant 1).
  logic [W-1:0] ones;
  assign ones[0] = 1'b1;
  for (genvar i = 1; i < W; i++) begin : g_chain
    assign ones[i] = ones[i-1] & b[i-1];
  end

  for (genvar i = 0; i < W; i++) begin : g_out
    if (i == 0) begin : g_lsb
      assign x[0] = ~b[0];
    end else begin : g_xor
      assign x[i] = b[i] ^ ones[i];
    end
  end
endmodule
