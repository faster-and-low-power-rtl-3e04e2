// hpm_tree_tb: self-checking test of the column compression tree. Partial
// products of real operands are fed in (pp[i][j] = a[i] & b[j]) and the two
// output rows must add up to a * b. A 4-bit tree is checked for all
// operand pairs, an 8-bit tree for all pairs too, and the default 16-bit
// tree with corner and random operands. A random, non-product pp array is
// also checked at 16 bits against the weighted bit count.
module hpm_tree_tb;
  int checks = 0, failures = 0;

  logic [3:0][3:0]   pp4;
  logic [7:0]        r04, r14;
  logic [7:0][7:0]   pp8;
  logic [15:0]       r08, r18;
  logic [15:0][15:0] pp16;
  logic [31:0]       r016, r116;

  hpm_tree #(.M(4)) u_4 (.pp(pp4), .row0(r04), .row1(r14));
  hpm_tree #(.M(8)) u_8 (.pp(pp8), .row0(r08), .row1(r18));
  hpm_tree u_16 (.pp(pp16), .row0(r016), .row1(r116));

  task automatic run16(input logic [15:0] a, input logic [15:0] b);
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) pp16[i][j] = a[i] & b[j];
    #1;
    checks++;
    if (32'(r016 + r116) !== 32'(a) * 32'(b)) begin
      failures++;
      $display("FAIL tree16 %0d * %0d: rows sum to %0d", a, b, 32'(r016 + r116));
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 16; a++)
      for (int b = 0; b < 16; b++) begin
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++) pp4[i][j] = 1'(a >> i) & 1'(b >> j);
        #1;
        checks++;
        if (8'(r04 + r14) !== 8'(a * b)) begin
          failures++;
          $display("FAIL tree4 %0d * %0d", a, b);
        end
      end
    for (int a = 0; a < 256; a++)
      for (int b = 0; b < 256; b++) begin
        for (int i = 0; i < 8; i++)
          for (int j = 0; j < 8; j++) pp8[i][j] = 1'(a >> i) & 1'(b >> j);
        #1;
        checks++;
        if (16'(r08 + r18) !== 16'(a * b)) begin
          failures++;
          $display("FAIL tree8 %0d * %0d", a, b);
        end
      end
    run16('1, '1);
    run16('0, '1);
    run16(16'h8000, 16'h8000);
    for (int k = 0; k < 3000; k++) run16(16'($urandom), 16'($urandom));
    // Arbitrary bit patterns: the rows must sum to the weighted count of
    // all set partial-product bits, modulo 2^32.
    for (int k = 0; k < 1000; k++) begin
      logic [63:0] want;
      want = 0;
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++) begin
          pp16[i][j] = 1'($urandom);
          if (pp16[i][j]) want += 64'(1) << (i + j);
        end
      #1;
      checks++;
      if (32'(r016 + r116) !== want[31:0]) begin
        failures++;
        $display("FAIL tree16 random array");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
