// csa_tree: Wallace tree of carry-save adders.
//
// Reduces N operands of WS bits to two (sum and carry words) whose sum,
// modulo 2^WS, equals the sum of the operands. Each tree level groups the
// operands of the level above in threes, feeds each triple to a 3:2
// compressor and passes the one or two left over straight down, so a level
// turns n operands into 2*floor(n/3) + n mod 3. For N = 14 this gives the
// six levels 14-10-7-5-4-3-2 of the b_i unit. Purely combinational; the
// carry-propagate addition of the two outputs is left to the instantiator.
module csa_tree #(
  parameter int N  = 14,
  parameter int WS = 18
) (
  input  logic [WS-1:0] op    [N],
  output logic [WS-1:0] sum,
  output logic [WS-1:0] carry
);

  function automatic int next_count(int n);
    return 2 * (n / 3) + n % 3;
  endfunction

  // Operands present at tree level l (level 0 = inputs).
  function automatic int count_at(int l);
    int n = N;
    for (int k = 0; k < l; k++) n = next_count(n);
    return n;
  endfunction

  function automatic int num_levels();
    int n = N;
    int l = 0;
    while (n > 2) begin
      n = next_count(n);
      l++;
    end
    return l;
  endfunction

  localparam int LEVELS = num_levels();

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int CNT = count_at(l);
    logic [WS-1:0] v [CNT];
    if (l == 0) begin : g_in
      for (genvar k = 0; k < CNT; k++) begin : g_op
        assign v[k] = op[k];
      end
    end else begin : g_red
      localparam int NPREV = count_at(l - 1);
      localparam int NC    = NPREV / 3;
      for (genvar k = 0; k < NC; k++) begin : g_csa
        csa32 #(.WS(WS)) u_csa (
          .a    (g_lvl[l-1].v[3*k]),
          .b    (g_lvl[l-1].v[3*k+1]),
          .c    (g_lvl[l-1].v[3*k+2]),
          .sum  (v[2*k]),
          .carry(v[2*k+1])
        );
      end
      for (genvar k = 0; k < NPREV % 3; k++) begin : g_pass
        assign v[2*NC+k] = g_lvl[l-1].v[3*NC+k];
      end
    end
  end

  if (LEVELS == 0 && N == 1) begin : g_one
    assign sum   = g_lvl[0].v[0];
    assign carry = '0;
  end else begin : g_out
    assign sum   = g_lvl[LEVELS].v[0];
    assign carry = g_lvl[LEVELS].v[1];
  end

endmodule
