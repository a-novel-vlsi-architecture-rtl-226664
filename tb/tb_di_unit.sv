// tb_di_unit: self-checking test of the PED unit. Compares d_i and the
// saturation flag with the reference d_{i+1} + ((b - R s)^2 >> FRAC), clipped
// to 12 bits, for every symbol and for directed (zero error, exact maximum,
// overflow) and random operands.
module tb_di_unit;
  import fsd_pkg::*;
  import fsd_ref_pkg::*;

  logic signed [11:0] r_ii, b;
  sym_t               s;
  logic [11:0]        d_parent, d;
  logic               sat;

  int checks = 0, failures = 0;
  int n_sat = 0;

  di_unit dut (.r_ii, .s, .b, .d_parent, .d, .sat);

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_vec();
    bit esat;
    int ed;
    ed = ref_d(int'(r_ii), int'(s), int'(b), int'(d_parent), esat);
    #1ns;
    checks++;
    if (esat) n_sat++;
    if (int'(d) != ed || sat != esat) begin
      failures++;
      if (failures < 10)
        $display("FAIL r=%0d s=%0d b=%0d dp=%0d: d=%0d sat=%0b expected %0d %0b",
                 r_ii, s, b, d_parent, d, sat, ed, esat);
    end
  endtask

  initial begin
    // Zero error: b = R s exactly, d_i = d_{i+1}.
    for (int c = 0; c < 4; c++) begin
      r_ii = 12'sd64; s = sym_t'(c); b = 12'(64 * sym_val(c)); d_parent = 12'd1234;
      check_vec();
    end
    // e = 64 (1.0): adds exactly 64; and overflow by one.
    r_ii = 12'sd0; s = SYM_P1; b = 12'sd64; d_parent = 12'd4031; check_vec();
    r_ii = 12'sd0; s = SYM_P1; b = 12'sd64; d_parent = 12'd4032; check_vec();
    // Largest error.
    r_ii = 12'sh7ff; s = SYM_P3; b = 12'sh800; d_parent = 12'd0; check_vec();
    // Random.
    for (int v = 0; v < 5000; v++) begin
      r_ii     = (v % 4 == 0) ? 12'($urandom) : 12'($urandom_range(8, 200));
      s        = sym_t'($urandom_range(0, 3));
      b        = (v % 4 == 1) ? 12'($urandom) : 12'($signed($urandom_range(0, 1000)) - 500);
      d_parent = 12'($urandom_range(0, 4095));
      check_vec();
    end
    if (n_sat == 0) begin
      failures++;
      $display("FAIL saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
