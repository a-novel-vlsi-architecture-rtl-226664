// tb_bi_unit: self-checking test of the b_i unit against the integer
// reference. Drives directed corner cases (all symbols +3 or -3 with
// full-scale R, every level 0..7) and random rows, symbols, levels and y,
// and compares b and the saturation flag. The unit is combinational, so each
// vector is checked 1 ns after it is applied.
module tb_bi_unit;
  import fsd_pkg::*;
  import fsd_ref_pkg::*;

  localparam int NV = 4000;

  logic signed [11:0] r_row [1:7];
  sym_t               s     [1:7];
  logic [2:0]         level;
  logic signed [11:0] y_zf;
  logic signed [11:0] b;
  logic               sat;

  int checks = 0, failures = 0;

  bi_unit dut (.r_row, .s, .level, .y_zf, .b, .sat);

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_vec();
    row_t rr, sv;
    longint raw;
    int exp_b;
    foreach (rr[j]) begin rr[j] = 0; sv[j] = 0; end
    for (int j = 1; j < 8; j++) begin
      rr[j] = int'(r_row[j]);
      sv[j] = sym_val(int'(s[j]));
    end
    exp_b = ref_b(rr, sv, int'(level), int'(y_zf));
    raw = y_zf;
    for (int j = int'(level) + 1; j < 8; j++) raw -= longint'(rr[j]) * sv[j];
    #1ns;
    checks++;
    if (int'(b) != exp_b || sat != (raw != exp_b)) begin
      failures++;
      if (failures < 10)
        $display("FAIL level=%0d y=%0d: b=%0d sat=%0b expected %0d sat=%0b",
                 level, y_zf, b, sat, exp_b, raw != exp_b);
    end
  endtask

  initial begin
    // Directed: extremes at every level.
    for (int lv = 0; lv < 8; lv++) begin
      for (int pat = 0; pat < 4; pat++) begin
        level = 3'(lv);
        y_zf  = (pat[0]) ? 12'sh7ff : 12'sh800;
        for (int j = 1; j < 8; j++) begin
          r_row[j] = pat[1] ? 12'sh7ff : 12'sh800;
          s[j]     = (pat == 1) ? SYM_M3 : SYM_P3;
        end
        check_vec();
      end
    end
    // Directed: single term products, each symbol value.
    for (int j0 = 1; j0 < 8; j0++) begin
      for (int c = 0; c < 4; c++) begin
        level = 0;
        y_zf  = 12'sd100;
        for (int j = 1; j < 8; j++) begin
          r_row[j] = (j == j0) ? 12'sd37 : 12'sd0;
          s[j]     = sym_t'(c);
        end
        check_vec();
      end
    end
    // Random vectors, moderate and full scale.
    for (int v = 0; v < NV; v++) begin
      level = 3'($urandom_range(0, 7));
      for (int j = 1; j < 8; j++) begin
        r_row[j] = (v % 2) ? 12'($urandom) : 12'($signed($urandom_range(0, 160)) - 80);
        s[j]     = sym_t'($urandom_range(0, 3));
      end
      y_zf = (v % 3 == 0) ? 12'($urandom) : 12'($signed($urandom_range(0, 800)) - 400);
      check_vec();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
