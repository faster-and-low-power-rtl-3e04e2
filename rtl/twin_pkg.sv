// twin_pkg: types and constants shared by the twin precision multiplier.
//
// The operation mode is a 2-bit code. Its four values and their meaning
// follow the paper's decoder truth table: 00 runs the two low-precision
// multipliers M1 and M4 side by side (twin precision), 01 runs M1 alone,
// 10 runs M4 alone and 11 runs all four multipliers for one full-width
// product. The decoder turns the mode into three clock enables, held here
// in a struct whose fields are named after the table's columns T[1..3]:
// t1 clocks the operand registers of M1, t2 those of M2 and M3, t3 those
// of M4 (the assignment of the middle enable to M2/M3 is this design's
// reading of the table, which enables T[2] only in full mode).
package twin_pkg;

  typedef enum logic [1:0] {
    MODE_TWIN    = 2'b00,  // M1 and M4: two independent N/2 x N/2 products
    MODE_ONLY_M1 = 2'b01,  // M1 alone: one N/2 x N/2 product in the low half
    MODE_ONLY_M4 = 2'b10,  // M4 alone: one N/2 x N/2 product in the high half
    MODE_FULL    = 2'b11   // all four: one N x N product
  } mode_e;

  typedef struct packed {
    logic t1;  // enable for the M1 operand registers
    logic t2;  // enable for the M2 and M3 operand registers
    logic t3;  // enable for the M4 operand registers
  } gate_en_t;

  // Default operand width N of the whole multiplier (the paper builds 16 and
  // 32 bit versions; 32 is the one its headline figures are quoted for).
  localparam int unsigned DEFAULT_N = 32;

endpackage
