// tb_fsd_ctrl: self-checking test of the control unit. Checks, cycle by
// cycle, the schedule of the paper's task table: after the start cycle,
// cycle 1 works on level 7 (b for all four level-6 groups), cycle t >= 2 on
// level 6 - (t-2)/4, column (t-2) mod 4; enumeration follows the b write of
// the previous cycle and is skipped for the fully expanded level 6; done
// comes 30 cycles after start. Then checks back-to-back traversals (one
// every 30 cycles) and that a start while busy is ignored.
module tb_fsd_ctrl;
  import fsd_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, ready, busy, init, run, top, b_en, de_valid, done;
  logic [2:0] level, de_level;
  logic [1:0] col, de_col;

  int checks = 0, failures = 0;
  int cycle = 0;

  always @(posedge clk) cycle <= cycle + 1;

  fsd_ctrl dut (.clk, .rst_n, .start, .ready, .busy, .init, .run, .level, .col,
                .top, .b_en, .de_valid, .de_level, .de_col, .done);

  always #5ns clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_bit(string what, logic got, logic exp, int t);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d %s=%0b expected %0b", t, what, got, exp);
    end
  endtask

  task automatic expect_int(string what, int got, int exp, int t);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d %s=%0d expected %0d", t, what, got, exp);
    end
  endtask

  // Check one traversal; the start cycle is the current cycle on entry.
  // hold_start: keep start high at the end so the next one follows.
  task automatic check_traversal(bit hold_start);
    int pl = -1, pc = -1;
    expect_bit("init", init, 1'b1, 0);
    expect_bit("run", run, 1'b0, 0);
    for (int t = 1; t <= 29; t++) begin
      int el, ec;
      @(posedge clk); #1ns;
      el = (t == 1) ? 7 : 6 - (t - 2) / 4;
      ec = (t == 1) ? 0 : (t - 2) % 4;
      expect_bit("run", run, 1'b1, t);
      expect_int("level", int'(level), el, t);
      expect_int("col", int'(col), ec, t);
      expect_bit("top", top, t == 1, t);
      expect_bit("b_en", b_en, el != 0, t);
      expect_bit("ready", ready, t == 29, t);
      expect_bit("done", done, 1'b0, t);
      // Enumeration on the group whose b was written in cycle t-1, level <= 5.
      expect_bit("de_valid", de_valid, (t >= 3 && pl >= 1 && pl <= 6), t);
      if (t >= 3 && pl >= 1) begin
        expect_int("de_level", int'(de_level), pl - 1, t);
        expect_int("de_col", int'(de_col), pc, t);
      end
      // A start in the middle must be ignored.
      start = (t == 10) || (hold_start && t == 29);
      pl = el;
      pc = ec;
    end
    @(posedge clk); #1ns;
    start = 1'b0;
    expect_bit("done", done, 1'b1, 30);
  endtask

  initial begin
    int t0, t1;
    start = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1ns;
    expect_bit("ready idle", ready, 1'b1, 0);
    expect_bit("busy idle", busy, 1'b0, 0);
    // Single traversal from idle.
    start = 1'b1;
    @(posedge clk); #1ns;
    start = 1'b0;
    t0 = cycle;
    check_traversal(1'b1);
    // Back-to-back: the next traversal's start cycle coincides with done.
    t1 = cycle;
    expect_int("latency cycles", t1 - t0, 30, 30);
    check_traversal(1'b0);
    expect_int("period cycles", cycle - t1, 30, 30);
    @(posedge clk); #1ns;
    expect_bit("busy after", busy, 1'b0, 31);
    expect_bit("done after", done, 1'b0, 31);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
