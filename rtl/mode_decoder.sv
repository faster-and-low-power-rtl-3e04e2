// mode_decoder: the 2-to-3 decoder that turns the operation mode into the
// three clock enables of the operand registers.
//
// Truth table (the paper's Table I):
//   mode 00 twin precision, M1 and M4  -> t1 t2 t3 = 1 0 1
//   mode 01 only M1                    -> 1 0 0
//   mode 10 only M4                    -> 0 0 1
//   mode 11 full N x N                 -> 1 1 1
// t1 enables the M1 registers, t2 the M2 and M3 registers, t3 the M4
// registers. Combinational.
module mode_decoder
  import twin_pkg::*;
(
  input  mode_e    mode,
  output gate_en_t t
);
  always_comb begin
    unique case (mode)
      MODE_TWIN:    t = '{t1: 1'b1, t2: 1'b0, t3: 1'b1};
      MODE_ONLY_M1: t = '{t1: 1'b1, t2: 1'b0, t3: 1'b0};
      MODE_ONLY_M4: t = '{t1: 1'b0, t2: 1'b0, t3: 1'b1};
      MODE_FULL:    t = '{t1: 1'b1, t2: 1'b1, t3: 1'b1};
      default:      t = '{t1: 1'b1, t2: 1'b1, t3: 1'b1};
    endcase
  end
endmodule
