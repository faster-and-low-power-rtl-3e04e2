// mbec_adder_tb: self-checking test of the product recombination adder.
// The four inputs are formed from real operand halves
// (P1 = aL*bL, P2 = aL*bH, P3 = aH*bL, P4 = aH*bH) and the output must be
// a * b. An 8-bit instance is checked for all operand pairs, a 16-bit one
// with corner and random operands. (The default 32-bit adder is exercised
// inside the full multiplier by twin_mult_tb; built on its own, its long
// carry chain makes the simulator's C++ compile take far too long.) Inputs that are not products
// of one operand pair are also checked against P4*2^N + (P2+P3)*2^(N/2) + P1
// modulo 2^(2N). The test counts how often the carry that drives the
// multiplexer is 1 (the BEC path is taken) and fails if it never is.
module mbec_adder_tb;
  int checks = 0, failures = 0;
  int sel_bec = 0, sel_plain = 0;

  logic [7:0]  q1, q2, q3, q4;
  logic [15:0] q;
  logic [15:0] p1, p2, p3, p4;
  logic [31:0] p;
  logic [15:0] corner_a [4], corner_b [4];

  mbec_adder #(.N(8)) u_8 (.p1(q1), .p2(q2), .p3(q3), .p4(q4), .p(q));
  mbec_adder #(.N(16)) u_16 (.p1(p1), .p2(p2), .p3(p3), .p4(p4), .p(p));

  // Carry out of the N+1-bit adder, worked out independently of the block.
  function automatic logic join_carry16(logic [15:0] x1, logic [15:0] x2,
                                        logic [15:0] x3, logic [15:0] x4);
    logic [17:0] t;
    t = 18'({x4[8:0], x1[15:8]}) + 18'(x2) + 18'(x3);
    return t[17];
  endfunction

  task automatic run16(input logic [15:0] a, input logic [15:0] b);
    p1 = 16'(a[7:0]) * 16'(b[7:0]);
    p2 = 16'(a[7:0]) * 16'(b[15:8]);
    p3 = 16'(a[15:8]) * 16'(b[7:0]);
    p4 = 16'(a[15:8]) * 16'(b[15:8]);
    #1;
    checks++;
    if (join_carry16(p1, p2, p3, p4)) sel_bec++;
    else sel_plain++;
    if (p !== 32'(a) * 32'(b)) begin
      failures++;
      $display("FAIL mbec16 %h * %h = %h", a, b, p);
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
    for (int a = 0; a < 256; a++)
      for (int b = 0; b < 256; b++) begin
        q1 = 8'((a & 15) * (b & 15));
        q2 = 8'((a & 15) * (b >> 4));
        q3 = 8'((a >> 4) * (b & 15));
        q4 = 8'((a >> 4) * (b >> 4));
        #1;
        checks++;
        if (q !== 16'(a * b)) begin
          failures++;
          $display("FAIL mbec8 %0d * %0d = %0d", a, b, q);
        end
      end
    corner_a[0] = '1;       corner_b[0] = '1;
    corner_a[1] = '1;       corner_b[1] = 16'd1;
    corner_a[2] = 16'h01FF; corner_b[2] = 16'h01FF;
    corner_a[3] = 16'hFF00; corner_b[3] = 16'h00FF;
    for (int k = 0; k < 20004; k++) begin
      if (k < 4) run16(corner_a[k], corner_b[k]);
      else run16(16'($urandom), 16'($urandom));
    end
    for (int k = 0; k < 5000; k++) begin
      logic [31:0] want;
      p1 = 16'($urandom); p2 = 16'($urandom); p3 = 16'($urandom); p4 = 16'($urandom);
      want = (32'(p4) << 16) + ((32'(p2) + 32'(p3)) << 8) + 32'(p1);
      #1;
      checks++;
      if (join_carry16(p1, p2, p3, p4)) sel_bec++;
      else sel_plain++;
      if (p !== want) begin
        failures++;
        $display("FAIL mbec16 arbitrary inputs: %h, expected %h", p, want);
      end
    end
    $display("BEC path taken %0d times, plain path %0d times", sel_bec, sel_plain);
    checks++;
    if (sel_bec == 0 || sel_plain == 0) begin
      failures++;
      $display("FAIL one multiplexer input was never selected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
