// tb_de_unit: self-checking test of the direct-enumeration unit. For
// directed and random (R_ii, b_i) pairs the chosen symbol and its clipped
// |e| are compared with an exhaustive search over the four symbols in the
// reference model. Directed cases put b exactly on each constellation point
// and exactly between two of them (ties).
module tb_de_unit;
  import fsd_pkg::*;
  import fsd_ref_pkg::*;

  logic signed [11:0] r_ii, b;
  sym_t               s_hat;
  logic [11:0]        abs_e;

  int checks = 0, failures = 0;

  de_unit dut (.r_ii, .b, .s_hat, .abs_e);

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_vec();
    int es, em;
    es = ref_de(int'(r_ii), int'(b));
    em = ref_de_mag(int'(r_ii), int'(b));
    #1ns;
    checks++;
    if (int'(s_hat) != es || int'(abs_e) != em) begin
      failures++;
      if (failures < 10)
        $display("FAIL r=%0d b=%0d: s=%0d |e|=%0d expected %0d %0d", r_ii, b, s_hat, abs_e, es, em);
    end
  endtask

  initial begin
    // On and between the constellation points.
    for (int r = 1; r < 300; r += 7) begin
      for (int v = -3; v <= 3; v++) begin
        r_ii = 12'(r);
        b    = 12'(r * v);
        check_vec();
        b    = 12'(r * v + 1);
        check_vec();
      end
    end
    // Full-scale corners.
    r_ii = 12'sh7ff; b = 12'sh800; check_vec();
    r_ii = 12'sh7ff; b = 12'sh7ff; check_vec();
    r_ii = 12'sh001; b = 12'sh800; check_vec();
    r_ii = 12'sh800; b = 12'sh7ff; check_vec();
    // Random.
    for (int v = 0; v < 5000; v++) begin
      r_ii = (v % 2) ? 12'($urandom) : 12'($urandom_range(8, 256));
      b    = (v % 3 == 0) ? 12'($urandom) : 12'($signed($urandom_range(0, 1600)) - 800);
      check_vec();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
