// tb_fsd_top: end-to-end test of the four-nodes-per-cycle FSD at its default
// parameters (4x4 MIMO, 16-QAM, 12-bit data, list of 16).
//
// Each test vector is an upper-triangular R and a vector y^ZF. Most are
// channel-like: a diagonal of 0.75 .. 2.5, off-diagonal terms up to +-0.6,
// y^ZF = R s + noise for a random transmitted vector s, in the 12-bit format
// with 6 fractional bits; some are noise free and some are full-scale random
// data that drive the b_i and PED arithmetic into saturation. For every
// traversal the 16 candidate paths and their PEDs are compared with the
// integer reference model, the start-to-done latency must be 30 cycles, and
// for noise-free vectors the transmitted s must be found with PED 0.
//
// Traversals are started both from idle and back to back (start during the
// last cycle of the previous traversal), and starts are also pulsed in the
// middle of traversals, where they must be ignored. Every one of these
// events, and saturation of a b_i and of a d_i unit, must occur at least once.
module tb_fsd_top;
  import fsd_pkg::*;
  import fsd_ref_pkg::*;

  localparam int NV = 300;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, start_drv, start_glitch, ready, busy, done, b_sat, d_sat;
  logic signed [11:0] r_mat [8][8];
  logic signed [11:0] y_zf [8];
  sym_t        cand_sym [16][8];
  logic [11:0] cand_ped [16];

  typedef struct {
    int cand [16][8];
    int ped [16];
    int true_k;          // candidate that must equal the sent vector, or -1
    int true_s [8];
    int accept_cycle;
  } exp_t;

  exp_t exp_q [$];
  int checks = 0, failures = 0, cycle = 0, n_done = 0;
  int n_idle_start = 0, n_b2b_start = 0, n_ignored = 0, n_bsat = 0, n_dsat = 0;
  int n_found = 0;

  assign start = start_drv | start_glitch;

  fsd_top dut (.clk, .rst_n, .start, .ready, .busy, .r_mat, .y_zf, .done,
               .cand_sym, .cand_ped, .b_sat, .d_sat);

  always #5ns clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (NV * 80 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clamp12(int x);
    return x > 2047 ? 2047 : (x < -2048 ? -2048 : x);
  endfunction

  // Build one test vector and its expected result.
  task automatic make_vector(int v, output mat_t r, output row_t y, output exp_t e);
    int kind = v % 6;   // 0: full-scale random, 1: noise free, else noisy
    int s [8];
    int nb, nd;
    for (int i = 0; i < 8; i++) s[i] = $urandom_range(0, 3);
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        if (j < i) r[i][j] = 0;
        else if (kind == 0) r[i][j] = $signed($urandom_range(0, 4095)) - 2048;
        else if (j == i) r[i][j] = $urandom_range(48, 160);
        else r[i][j] = $signed($urandom_range(0, 76)) - 38;
      end
    for (int i = 0; i < 8; i++) begin
      int acc = 0;
      for (int j = i; j < 8; j++) acc += r[i][j] * sym_val(s[j]);
      if (kind == 0) y[i] = $signed($urandom_range(0, 4095)) - 2048;
      else if (kind == 1) y[i] = clamp12(acc);
      else y[i] = clamp12(acc + $signed($urandom_range(0, 80)) - 40);
    end
    ref_fsd(r, y, e.cand, e.ped, nb, nd);
    e.true_k = -1;
    if (kind == 1) begin
      bit fits = 1'b1;
      for (int i = 0; i < 8; i++) begin
        int acc = 0;
        for (int j = i; j < 8; j++) acc += r[i][j] * sym_val(s[j]);
        if (acc != clamp12(acc)) fits = 1'b0;
      end
      if (fits) e.true_k = 4 * s[7] + s[6];
    end
    for (int i = 0; i < 8; i++) e.true_s[i] = s[i];
  endtask

  // Driver.
  initial begin
    int last_accept = 0;
    mat_t r;
    row_t y;
    exp_t e;
    start_drv = 1'b0;
    foreach (r_mat[i, j]) r_mat[i][j] = '0;
    foreach (y_zf[i]) y_zf[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int v = 0; v < NV; v++) begin
      bit was_busy;
      make_vector(v, r, y, e);
      // Every fourth traversal starts from idle after a gap.
      if (v % 4 == 0) begin
        while (busy) @(posedge clk);
        repeat ($urandom_range(1, 5)) @(posedge clk);
      end
      @(negedge clk);
      while (!ready) @(negedge clk);
      was_busy = busy;
      start_drv = 1'b1;
      @(posedge clk);
      #1ns;
      start_drv = 1'b0;
      if (was_busy) begin
        n_b2b_start++;
        // Back to back: one traversal every 30 cycles.
        checks++;
        if (cycle - last_accept != 30) begin
          failures++;
          $display("FAIL back-to-back period %0d cycles, expected 30", cycle - last_accept);
        end
      end else begin
        n_idle_start++;
      end
      last_accept = cycle;
      e.accept_cycle = cycle;
      exp_q.push_back(e);
      // New R and y^ZF from the start cycle on, held for the traversal.
      for (int i = 0; i < 8; i++) begin
        y_zf[i] = 12'(y[i]);
        for (int j = 0; j < 8; j++) r_mat[i][j] = 12'(r[i][j]);
      end
    end
    while (exp_q.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (n_done != NV) begin
      failures++;
      $display("FAIL %0d traversals completed, expected %0d", n_done, NV);
    end
    // Every mechanism must have happened.
    checks += 6;
    if (n_idle_start == 0) begin failures++; $display("FAIL no start from idle"); end
    if (n_b2b_start == 0)  begin failures++; $display("FAIL no back-to-back start"); end
    if (n_ignored == 0)    begin failures++; $display("FAIL no start ignored while busy"); end
    if (n_bsat == 0)       begin failures++; $display("FAIL b_i saturation never seen"); end
    if (n_dsat == 0)       begin failures++; $display("FAIL PED saturation never seen"); end
    if (n_found == 0)      begin failures++; $display("FAIL no noise-free vector checked"); end
    $display("events: idle starts %0d, back-to-back %0d, ignored starts %0d, b sat cycles %0d, d sat cycles %0d, noise-free found %0d",
             n_idle_start, n_b2b_start, n_ignored, n_bsat, n_dsat, n_found);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Starts pulsed in the middle of a traversal must be ignored.
  initial begin
    start_glitch = 1'b0;
    forever begin
      @(negedge clk);
      if (busy && !ready && $urandom_range(0, 40) == 0) begin
        start_glitch = 1'b1;
        n_ignored++;
        @(posedge clk);
        #1ns;
        start_glitch = 1'b0;
      end
    end
  end

  // Monitor and scoreboard.
  always @(negedge clk) begin
    if (rst_n) begin
      if (b_sat) n_bsat++;
      if (d_sat) n_dsat++;
    end
    if (rst_n && done) begin
      exp_t e;
      int bad;
      int k;
      bad = 0;
      n_done++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL done without a pending traversal");
      end else begin
        e = exp_q.pop_front();
        checks++;
        if (cycle - e.accept_cycle != 30) begin
          failures++;
          $display("FAIL latency %0d cycles, expected 30", cycle - e.accept_cycle);
        end
        for (int c = 0; c < 16; c++) begin
          for (int i = 0; i < 8; i++)
            if (int'(cand_sym[c][i]) != e.cand[c][i]) bad++;
          if (int'(cand_ped[c]) != e.ped[c]) bad++;
        end
        checks++;
        if (bad != 0) begin
          failures++;
          if (failures < 10) begin
            $display("FAIL traversal %0d: %0d mismatching fields", n_done, bad);
            for (int c = 0; c < 16; c++)
              for (int i = 0; i < 8; i++)
                if (int'(cand_sym[c][i]) != e.cand[c][i])
                  $display("  candidate %0d level %0d: %0d expected %0d", c, i, cand_sym[c][i], e.cand[c][i]);
          end
        end
        if (e.true_k >= 0) begin
          k = e.true_k;
          n_found++;
          checks++;
          for (int i = 0; i < 8; i++) if (int'(cand_sym[k][i]) != e.true_s[i]) bad++;
          if (cand_ped[k] != 0) bad++;
          if (bad != 0) begin
            failures++;
            $display("FAIL noise-free vector not recovered in candidate %0d", k);
          end
        end
      end
    end
  end
endmodule
