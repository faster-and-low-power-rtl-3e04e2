// bec_tb: self-checking test of the Binary to Excess-1 Converter. The
// 5-bit instance (the size of the paper's worked example) is checked for
// every input, the 15-bit instance (N/2-1 for N = 32) for every input too.
// Reference: (b + 1) modulo 2^W.
module bec_tb;
  int checks = 0, failures = 0;

  logic [4:0]  b5, x5;
  logic [14:0] b15, x15;

  bec #(.W(5)) u_5 (.b(b5), .x(x5));
  bec u_15 (.b(b15), .x(x15));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 32; v++) begin
      b5 = 5'(v);
      #1;
      checks++;
      if (x5 !== 5'(v + 1)) begin
        failures++;
        $display("FAIL bec5 %0d -> %0d", v, x5);
      end
    end
    for (int v = 0; v < 32768; v++) begin
      b15 = 15'(v);
      #1;
      checks++;
      if (x15 !== 15'(v + 1)) begin
        failures++;
        $display("FAIL bec15 %0d -> %0d", v, x15);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
