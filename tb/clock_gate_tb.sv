// clock_gate_tb: checks the clock gate. The clock has a period of 10
// (rising at 5, falling at 10 of every period). Each period the enable
// takes a random value at offset 2, while the clock is low, and sometimes
// a second random value at offset 7, while the clock is high. gclk must
// be low throughout the low phase, and throughout the high phase equal to
// the enable as it stood at the rising edge: a change during the high
// phase must neither cut nor start a pulse. Rising gclk edges are counted
// and compared with the number of enabled cycles.
module clock_gate_tb;
  int checks = 0, failures = 0;
  int pulses = 0, want_pulses = 0, glitch_tries = 0;

  logic clk = 1'b0, en = 1'b0, gclk;
  logic en_at_rise;

  clock_gate u_dut (.clk(clk), .en(en), .gclk(gclk));

  always @(posedge gclk) pulses++;

  task automatic expect_g(input logic v, input string where);
    checks++;
    if (gclk !== v) begin
      failures++;
      $display("FAIL at %0t (%s): gclk = %b, expected %b", $time, where, gclk, v);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 400; k++) begin
      #2 en = 1'($urandom);
      #1 expect_g(1'b0, "low phase");
      #2 clk = 1'b1;
      en_at_rise = en;
      if (en_at_rise) want_pulses++;
      #1 expect_g(en_at_rise, "early high phase");
      #1;
      if ($urandom % 2 == 1) begin
        en = ~en;
        glitch_tries++;
      end
      #1 expect_g(en_at_rise, "late high phase");
      #1 expect_g(en_at_rise, "end of high phase");
      #1 clk = 1'b0;
    end
    #1;
    checks++;
    if (pulses != want_pulses) begin
      failures++;
      $display("FAIL %0d gated pulses, expected %0d", pulses, want_pulses);
    end
    $display("enable changed during the high phase %0d times", glitch_tries);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
