// mode_decoder_tb: checks the decoder against the four rows of its truth
// table (mode -> T[1] T[2] T[3]: 00 -> 101, 01 -> 100, 10 -> 001,
// 11 -> 111), written out here as constants.
module mode_decoder_tb;
  import twin_pkg::*;
  int checks = 0, failures = 0;

  mode_e    mode;
  gate_en_t t;
  logic [2:0] want [4];

  mode_decoder u_dut (.mode(mode), .t(t));

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    want[0] = 3'b101;
    want[1] = 3'b100;
    want[2] = 3'b001;
    want[3] = 3'b111;
    for (int r = 0; r < 2; r++)
      for (int m = 0; m < 4; m++) begin
        mode = mode_e'(m);
        #1;
        checks++;
        if ({t.t1, t.t2, t.t3} !== want[m]) begin
          failures++;
          $display("FAIL mode %02b gives T = %03b, expected %03b", m[1:0], {t.t1, t.t2, t.t3}, want[m]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
