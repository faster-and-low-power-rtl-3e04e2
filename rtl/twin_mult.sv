// twin_mult: N x N unsigned twin precision multiplier with a hybrid
// (multiplexer plus Binary to Excess-1 Converter) final adder and
// clock-gated operand registers.
//
// The N-bit operands are split in halves, and four N/2 x N/2
// sub-multipliers work on the four half-products in parallel:
//   M1 = inp1[H-1:0] * inp2[H-1:0]    M2 = inp1[H-1:0] * inp2[N-1:H]
//   M3 = inp1[N-1:H] * inp2[H-1:0]    M4 = inp1[N-1:H] * inp2[N-1:H]
// (H = N/2). mbec_adder joins the four products into the 2N-bit result.
// Each sub-multiplier has its own pair of H-bit operand registers, and a
// mode decoder with three clock gates decides which pairs load:
//   mode 11 full: all four load; res = inp1 * inp2.
//   mode 00 twin: M1 and M4 load; res[N-1:0] = inp1[H-1:0] * inp2[H-1:0]
//                 and res[2N-1:N] = inp1[N-1:H] * inp2[N-1:H].
//   mode 01 only M1: res[N-1:0] = inp1[H-1:0] * inp2[H-1:0].
//   mode 10 only M4: res[2N-1:N] = inp1[N-1:H] * inp2[N-1:H].
// A sub-multiplier whose registers are not clocked keeps its old operands,
// so its logic does not switch: that is where the power saving comes
// from. In a single-multiplier mode the other half of res therefore shows
// the product of the last operands loaded into that sub-multiplier, and
// only the named half is the result.
//
// Addition of this design: the paper does not say how the held products
// of M2 and M3 are kept out of the sum in the low-precision modes. Here a
// one-bit register, clocked every cycle, remembers whether M2/M3 were
// loaded, and when they were not, their products are replaced by zero in
// front of the adder, so that res = {P4, P1} exactly.
//
// Timing: inp1, inp2 and twin are sampled at a rising clk edge; res holds
// the product after the next rising edge (one cycle of latency, one new
// operation per cycle). rst_n is an asynchronous active-low reset of all
// registers (also this design's addition). twin must be stable before the
// rising edge, as for any synchronous input.
module twin_mult
  import twin_pkg::*;
#(
  parameter int unsigned N = DEFAULT_N
) (
  input  logic           clk,
  input  logic           rst_n,
  input  mode_e          twin,
  input  logic [N-1:0]   inp1,
  input  logic [N-1:0]   inp2,
  output logic [2*N-1:0] res
);
  localparam int unsigned H = N / 2;

  // Mode decoder and the three gated clocks.
  gate_en_t t;
  logic     gclk1, gclk23, gclk4;

  mode_decoder u_dec (.mode(twin), .t(t));

  clock_gate u_cg1  (.clk(clk), .en(t.t1), .gclk(gclk1));
  clock_gate u_cg23 (.clk(clk), .en(t.t2), .gclk(gclk23));
  clock_gate u_cg4  (.clk(clk), .en(t.t3), .gclk(gclk4));

  // Operand registers, two per sub-multiplier.
  logic [H-1:0] a1, b1, a2, b2, a3, b3, a4, b4;

  half_reg #(.W(H)) u_a1 (.gclk(gclk1),  .rst_n(rst_n), .d(inp1[H-1:0]), .q(a1));
  half_reg #(.W(H)) u_b1 (.gclk(gclk1),  .rst_n(rst_n), .d(inp2[H-1:0]), .q(b1));
  half_reg #(.W(H)) u_a2 (.gclk(gclk23), .rst_n(rst_n), .d(inp1[H-1:0]), .q(a2));
  half_reg #(.W(H)) u_b2 (.gclk(gclk23), .rst_n(rst_n), .d(inp2[N-1:H]), .q(b2));
  half_reg #(.W(H)) u_a3 (.gclk(gclk23), .rst_n(rst_n), .d(inp1[N-1:H]), .q(a3));
  half_reg #(.W(H)) u_b3 (.gclk(gclk23), .rst_n(rst_n), .d(inp2[H-1:0]), .q(b3));
  half_reg #(.W(H)) u_a4 (.gclk(gclk4),  .rst_n(rst_n), .d(inp1[N-1:H]), .q(a4));
  half_reg #(.W(H)) u_b4 (.gclk(gclk4),  .rst_n(rst_n), .d(inp2[N-1:H]), .q(b4));

  // The four sub-multipliers.
  logic [N-1:0] p1, p2, p3, p4;

  half_mult #(.M(H)) u_m1 (.a(a1), .b(b1), .p(p1));
  half_mult #(.M(H)) u_m2 (.a(a2), .b(b2), .p(p2));
  half_mult #(.M(H)) u_m3 (.a(a3), .b(b3), .p(p3));
  half_mult #(.M(H)) u_m4 (.a(a4), .b(b4), .p(p4));

  // Whether M2/M3 hold the current operation's operands.
  logic mid_live;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mid_live <= 1'b0;
    else        mid_live <= t.t2;
  end

  logic [N-1:0] p2_use, p3_use;
  assign p2_use = mid_live ? p2 : '0;
  assign p3_use = mid_live ? p3 : '0;

  // Product recombination and output register.
  logic [2*N-1:0] prod;

  mbec_adder #(.N(N)) u_add (
    .p1(p1),
    .p2(p2_use),
    .p3(p3_use),
    .p4(p4),
    .p (prod)
  );

  out_reg #(.W(2 * N)) u_out (.clk(clk), .rst_n(rst_n), .d(prod), .q(res));
endmodule
