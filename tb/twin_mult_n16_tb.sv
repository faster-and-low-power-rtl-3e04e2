// twin_mult_n16_tb: the end-to-end test of twin_mult_tb, run on the
// 16-bit version of the multiplier (N = 16, four 8 x 8 sub-multipliers)
// with 10,000 operations in each mode: one full 16 x 16 product, two 8 x 8
// products side by side, and a single 8 x 8 product on M1 or on M4. The
// reference model, the counted mechanisms and the pass criteria are those
// of twin_mult_tb.
module twin_mult_n16_tb;
  import twin_pkg::*;

  localparam int N   = 16;
  localparam int H   = N / 2;
  localparam int OPS = 10000;

  int checks = 0, failures = 0;
  int mode_ops [4];
  int switches = 0, bec_used = 0, held_checked = 0, resets = 0;

  logic           clk = 1'b0, rst_n = 1'b0;
  mode_e          twin;
  logic [N-1:0]   inp1, inp2;
  logic [2*N-1:0] res;

  twin_mult #(.N(N)) u_dut (
    .clk  (clk),
    .rst_n(rst_n),
    .twin (twin),
    .inp1 (inp1),
    .inp2 (inp2),
    .res  (res)
  );

  always #5 clk = ~clk;

  // Reference state: operand halves held by each sub-multiplier, and
  // whether M2/M3 were loaded on the last edge.
  logic [H-1:0]   ma [4], mb [4];
  logic           m_live;
  logic [2*N-1:0] want;       // res expected after the next rising edge
  logic           want_full;  // want was predicted for a full-mode operation
  logic [1:0]     want_mode;  // mode of the operation want belongs to
  logic [1:0]     loaded_mode;

  function automatic logic [N-1:0] hp(logic [H-1:0] x, logic [H-1:0] y);
    return N'(x) * N'(y);
  endfunction

  function automatic logic [N-1:0] rand_word();
    logic [N-1:0] v;
    v = N'({$urandom, $urandom});
    case ($urandom % 6)
      0: v[H-1:0] = '1;
      1: v[N-1:H] = '1;
      2: v = '1;
      default: ;
    endcase
    return v;
  endfunction

  initial begin
    #((4 * OPS + 100) * 10 * 2);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int run_left;
    mode_e cur, prev;
    logic [N-1:0] p1, p2, p3, p4;
    logic [N+1:0] join_sum;

    for (int m = 0; m < 4; m++) begin
      ma[m] = '0;
      mb[m] = '0;
      mode_ops[m] = 0;
    end
    m_live = 1'b0;
    twin = MODE_FULL;
    inp1 = '0;
    inp2 = '0;
    want = '0;
    want_full = 1'b0;
    want_mode = 2'b00;
    loaded_mode = 2'b00;
    run_left = 0;
    cur = MODE_FULL;
    prev = MODE_FULL;

    repeat (2) @(negedge clk);
    checks++;
    if (res !== '0) begin
      failures++;
      $display("FAIL res not cleared by reset");
    end
    rst_n = 1'b1;

    while (mode_ops[0] < OPS || mode_ops[1] < OPS || mode_ops[2] < OPS || mode_ops[3] < OPS) begin
      // Check what the last rising edge produced.
      checks++;
      if (res !== want) begin
        failures++;
        if (failures < 10)
          $display("FAIL at %0t mode %02b: res = %h, expected %h", $time, want_mode, res, want);
      end
      if (want_mode == 2'b01 || want_mode == 2'b10) held_checked++;
      if (want_full) begin
        p1 = hp(ma[0], mb[0]);
        p2 = hp(ma[1], mb[1]);
        p3 = hp(ma[2], mb[2]);
        p4 = hp(ma[3], mb[3]);
        join_sum = (N+2)'({p4[H:0], p1[N-1:H]}) + (N+2)'(p2) + (N+2)'(p3);
        if (join_sum[N+1]) bec_used++;
      end

      // One asynchronous reset in the middle of the run.
      if (resets == 0 && mode_ops[3] == OPS / 2) begin
        rst_n = 1'b0;
        #1;
        checks++;
        if (res !== '0) begin
          failures++;
          $display("FAIL res not cleared by the mid-run reset");
        end
        for (int m = 0; m < 4; m++) begin
          ma[m] = '0;
          mb[m] = '0;
        end
        m_live = 1'b0;
        loaded_mode = 2'b00;
        want = '0;
        want_full = 1'b0;
        resets++;
        @(negedge clk);
        rst_n = 1'b1;
        continue;
      end

      // Choose the next mode: runs of one mode, or random switching.
      if (run_left == 0) begin
        cur = mode_e'($urandom % 4);
        run_left = ($urandom % 3 == 0) ? 1 : 1 + $urandom % 40;
      end
      run_left--;
      if (cur != prev) switches++;
      prev = cur;
      mode_ops[cur]++;

      twin = cur;
      inp1 = rand_word();
      inp2 = rand_word();

      // Reference: what res will show one edge after these operands load.
      // The output register captures the product of what the sub-
      // multipliers hold now, so the expectation for the next check is
      // formed from the current state; these operands show one edge later.
      begin
        logic [2*N-1:0] r;
        r = ((2*N)'(hp(ma[3], mb[3])) << N) + (2*N)'(hp(ma[0], mb[0]))
          + (m_live ? ((2*N)'(hp(ma[1], mb[1])) + (2*N)'(hp(ma[2], mb[2]))) << H : '0);
        want = r;
      end
      want_full = m_live;
      want_mode = loaded_mode;
      loaded_mode = cur;

      // Operands loaded at the coming edge.
      if (cur != MODE_ONLY_M4) begin
        ma[0] = inp1[H-1:0]; mb[0] = inp2[H-1:0];
      end
      if (cur == MODE_FULL) begin
        ma[1] = inp1[H-1:0]; mb[1] = inp2[N-1:H];
        ma[2] = inp1[N-1:H]; mb[2] = inp2[H-1:0];
      end
      if (cur != MODE_ONLY_M1) begin
        ma[3] = inp1[N-1:H]; mb[3] = inp2[N-1:H];
      end
      m_live = (cur == MODE_FULL);

      @(negedge clk);
    end
    $display("operations per mode: twin %0d, M1 only %0d, M4 only %0d, full %0d",
             mode_ops[0], mode_ops[1], mode_ops[2], mode_ops[3]);
    $display("mode switches %0d, BEC path in full mode %0d, held-half checks %0d, resets %0d",
             switches, bec_used, held_checked, resets);
    for (int m = 0; m < 4; m++) begin
      checks++;
      if (mode_ops[m] == 0) failures++;
    end
    checks++;
    if (switches == 0) failures++;
    checks++;
    if (bec_used == 0) failures++;
    checks++;
    if (held_checked == 0) failures++;
    checks++;
    if (resets == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
