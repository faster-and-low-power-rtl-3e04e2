// half_mult_tb: self-checking test of the N/2-bit sub-multiplier. A 4-bit
// instance is checked for all operand pairs, the default 16-bit one with
// corner and random operands. Reference: the integer product.
module half_mult_tb;
  int checks = 0, failures = 0;

  logic [3:0]  a4, b4;
  logic [7:0]  p4;
  logic [15:0] a16, b16;
  logic [31:0] p16;

  half_mult #(.M(4)) u_4 (.a(a4), .b(b4), .p(p4));
  half_mult u_16 (.a(a16), .b(b16), .p(p16));

  task automatic run16(input logic [15:0] a, input logic [15:0] b);
    a16 = a; b16 = b;
    #1;
    checks++;
    if (p16 !== 32'(a) * 32'(b)) begin
      failures++;
      $display("FAIL mult16 %0d * %0d = %0d", a, b, p16);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 16; a++)
      for (int b = 0; b < 16; b++) begin
        a4 = 4'(a); b4 = 4'(b);
        #1;
        checks++;
        if (p4 !== 8'(a * b)) begin
          failures++;
          $display("FAIL mult4 %0d * %0d = %0d", a, b, p4);
        end
      end
    run16('1, '1);
    run16('1, 16'd1);
    run16('0, '1);
    run16(16'h8000, 16'hFFFF);
    for (int k = 0; k < 5000; k++) run16(16'($urandom), 16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
