// rca_tb: self-checking test of the ripple carry adder. A 4-bit instance
// is checked exhaustively (all a, b and carry-in values) and a 32-bit
// instance, the default width, with corner cases and random operands.
// Reference: the integer sum a + b + ci, split into sum and carry out.
module rca_tb;
  int checks = 0, failures = 0;

  logic [3:0]  a4, b4, s4;
  logic        ci4, co4;
  logic [31:0] a32, b32, s32;
  logic        ci32, co32;

  rca #(.W(4)) u_small (.a(a4), .b(b4), .ci(ci4), .s(s4), .co(co4));
  rca u_dflt (.a(a32), .b(b32), .ci(ci32), .s(s32), .co(co32));

  task automatic check32(input logic [31:0] x, input logic [31:0] y, input logic c);
    logic [32:0] ref_sum;
    a32 = x; b32 = y; ci32 = c;
    #1;
    ref_sum = 33'(x) + 33'(y) + 33'(c);
    checks++;
    if ({co32, s32} !== ref_sum) begin
      failures++;
      $display("FAIL rca32 %h + %h + %b = %h, expected %h", x, y, c, {co32, s32}, ref_sum);
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
    for (int x = 0; x < 16; x++)
      for (int y = 0; y < 16; y++)
        for (int c = 0; c < 2; c++) begin
          a4 = 4'(x); b4 = 4'(y); ci4 = 1'(c);
          #1;
          checks++;
          if ({co4, s4} !== 5'(x + y + c)) begin
            failures++;
            $display("FAIL rca4 %0d + %0d + %0d = %0d", x, y, c, {co4, s4});
          end
        end
    check32('1, '0, 1'b1);
    check32('1, '1, 1'b1);
    check32(32'h8000_0000, 32'h8000_0000, 1'b0);
    check32(32'h5555_5555, 32'hAAAA_AAAA, 1'b1);
    for (int k = 0; k < 2000; k++) check32($urandom, $urandom, 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
