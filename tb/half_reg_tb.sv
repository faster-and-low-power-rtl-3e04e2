// half_reg_tb: checks the register at its default width (16 bits): the
// asynchronous reset clears it without a clock edge, each rising edge of
// its clock loads d, and between edges q holds while d changes.
module half_reg_tb;
  int checks = 0, failures = 0;

  logic          gclk = 1'b0, rst_n = 1'b1;
  logic [15:0]   d, q, held;

  half_reg u_dut (.gclk(gclk), .rst_n(rst_n), .d(d), .q(q));

  task automatic expect_q(input logic [15:0] v, input string what);
    checks++;
    if (q !== v) begin
      failures++;
      $display("FAIL %s: q = %h, expected %h", what, q, v);
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
    d = 16'hBEEF;
    #1 gclk = 1'b1;
    #1 gclk = 1'b0;
    #1 rst_n = 1'b0;
    #1 expect_q('0, "asynchronous reset");
    #1 gclk = 1'b1;
    #1 expect_q('0, "clock edge during reset");
    #1 gclk = 1'b0;
    #1 rst_n = 1'b1;
    for (int k = 0; k < 500; k++) begin
      d = 16'($urandom) ^ 16'($urandom);
      held = d;
      #1 gclk = 1'b1;
      #1 expect_q(held, "load on rising edge");
      d = ~d;
      #1 expect_q(held, "hold while clock high");
      gclk = 1'b0;
      #1 expect_q(held, "hold after falling edge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
