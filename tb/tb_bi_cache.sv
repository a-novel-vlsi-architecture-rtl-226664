// tb_bi_cache: self-checking test of the b_i cache. Random sequences of
// y_7 loads, broadcast writes and group writes are applied while both read
// ports are swept; every read is compared with a model array kept in the
// testbench, which also checks read-before-write behaviour in a write cycle.
module tb_bi_cache;
  import fsd_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic load, we, bcast;
  logic signed [11:0] y7;
  logic [1:0] wcol, rcol_crt, rcol_prv;
  logic signed [11:0] wdata [4], rdata_crt [4], rdata_prv [4];
  logic signed [11:0] model [16];

  int checks = 0, failures = 0;

  bi_cache dut (.clk, .rst_n, .load, .y7, .we, .bcast, .wcol, .wdata,
                .rcol_crt, .rdata_crt, .rcol_prv, .rdata_prv);

  always #5ns clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; we = 0; bcast = 0; y7 = '0; wcol = '0; rcol_crt = '0; rcol_prv = '0;
    foreach (wdata[n]) wdata[n] = '0;
    foreach (model[k]) model[k] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      int op;
      op = $urandom_range(0, 9);
      @(negedge clk);
      load  = (op == 0);
      we    = (op >= 2 && op <= 7);
      bcast = (op == 2);
      y7    = 12'($urandom);
      wcol  = 2'($urandom);
      rcol_crt = 2'($urandom);
      rcol_prv = 2'($urandom);
      foreach (wdata[n]) wdata[n] = 12'($urandom);
      #1ns;
      for (int n = 0; n < 4; n++) begin
        checks += 2;
        if (rdata_crt[n] != model[4*rcol_crt+n]) failures++;
        if (rdata_prv[n] != model[4*rcol_prv+n]) failures++;
      end
      @(posedge clk);
      if (load) for (int n = 0; n < 4; n++) model[n] = y7;
      else if (we) for (int n = 0; n < 4; n++)
        if (bcast) for (int m = 0; m < 4; m++) model[4*n+m] = wdata[n];
        else model[4*wcol+n] = wdata[n];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
