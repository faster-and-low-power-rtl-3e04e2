// out_reg_tb: checks the register at its default width (64 bits): the
// asynchronous reset clears it without a clock edge, each rising edge of
// its clock loads d, and between edges q holds while d changes.
module out_reg_tb;
  int checks = 0, failures = 0;

  logic          clk = 1'b0, rst_n = 1'b1;
  logic [63:0]   d, q, held;

  out_reg u_dut (.clk(clk), .rst_n(rst_n), .d(d), .q(q));

  task automatic expect_q(input logic [63:0] v, input string what);
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
    d = {2{32'hDEAD_BEEF}};
    #1 clk = 1'b1;
    #1 clk = 1'b0;
    #1 rst_n = 1'b0;
    #1 expect_q('0, "asynchronous reset");
    #1 clk = 1'b1;
    #1 expect_q('0, "clock edge during reset");
    #1 clk = 1'b0;
    #1 rst_n = 1'b1;
    for (int k = 0; k < 500; k++) begin
      d = {$urandom, $urandom};
      held = d;
      #1 clk = 1'b1;
      #1 expect_q(held, "load on rising edge");
      d = ~d;
      #1 expect_q(held, "hold while clock high");
      clk = 1'b0;
      #1 expect_q(held, "hold after falling edge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
