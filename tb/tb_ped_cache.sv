// tb_ped_cache: self-checking test of the PED cache. Random broadcast and
// group writes with random group reads; the group port and the full-array
// output are compared every cycle with a model array in the testbench.
module tb_ped_cache;
  import fsd_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic we, bcast;
  logic [1:0] wcol, rcol;
  logic [11:0] wdata [4], rdata [4], all [16];
  logic [11:0] model [16];

  int checks = 0, failures = 0;

  ped_cache dut (.clk, .rst_n, .we, .bcast, .wcol, .wdata, .rcol, .rdata, .all);

  always #5ns clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; bcast = 0; wcol = '0; rcol = '0;
    foreach (wdata[n]) wdata[n] = '0;
    foreach (model[k]) model[k] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      int op;
      op = $urandom_range(0, 9);
      @(negedge clk);
      we    = (op <= 6);
      bcast = (op == 0);
      wcol  = 2'($urandom);
      rcol  = 2'($urandom);
      foreach (wdata[n]) wdata[n] = 12'($urandom);
      #1ns;
      for (int n = 0; n < 4; n++) begin
        checks++;
        if (rdata[n] != model[4*rcol+n]) failures++;
      end
      for (int k = 0; k < 16; k++) begin
        checks++;
        if (all[k] != model[k]) failures++;
      end
      @(posedge clk);
      if (we) for (int n = 0; n < 4; n++)
        if (bcast) for (int m = 0; m < 4; m++) model[4*n+m] = wdata[n];
        else model[4*wcol+n] = wdata[n];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
