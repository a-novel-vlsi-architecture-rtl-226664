// tb_path_history_cache: self-checking test of the path history cache.
// Random group writes at random levels 0..5 with random reads on both read
// ports; every output is compared each cycle with a model array.
module tb_path_history_cache;
  import fsd_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic we;
  logic [1:0] wcol, rcol_d, rcol_b;
  logic [2:0] wlev, rlev_d;
  sym_t wdata [4], rdata_d [4], rpath_b [4][6], all [16][6];
  sym_t model [16][6];

  int checks = 0, failures = 0;

  path_history_cache dut (.clk, .rst_n, .we, .wcol, .wlev, .wdata, .rcol_d,
                          .rlev_d, .rdata_d, .rcol_b, .rpath_b, .all);

  always #5ns clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wcol = '0; wlev = '0; rcol_d = '0; rlev_d = '0; rcol_b = '0;
    foreach (wdata[n]) wdata[n] = '0;
    foreach (model[k, l]) model[k][l] = SYM_M3;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      we     = ($urandom_range(0, 3) != 0);
      wcol   = 2'($urandom);
      wlev   = 3'($urandom_range(0, 5));
      rcol_d = 2'($urandom);
      rlev_d = 3'($urandom_range(0, 5));
      rcol_b = 2'($urandom);
      foreach (wdata[n]) wdata[n] = sym_t'($urandom);
      #1ns;
      for (int n = 0; n < 4; n++) begin
        checks++;
        if (rdata_d[n] != model[4*rcol_d+n][rlev_d]) failures++;
        for (int l = 0; l < 6; l++) begin
          checks++;
          if (rpath_b[n][l] != model[4*rcol_b+n][l]) failures++;
        end
      end
      for (int k = 0; k < 16; k++)
        for (int l = 0; l < 6; l++) begin
          checks++;
          if (all[k][l] != model[k][l]) failures++;
        end
      @(posedge clk);
      if (we) for (int n = 0; n < 4; n++) model[4*wcol+n][wlev] = wdata[n];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
