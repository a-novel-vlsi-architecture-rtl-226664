// path_history_cache: symbols chosen by direct enumeration on each path.
//
// Holds, for each of the NCAND paths, the 2-bit symbol code of levels
// 0 .. NPATH-1 (the lowest six levels: 16 x 6 x 2 = 192 flip-flops, as in
// the paper). The symbols of the two top levels are not stored: path
// P*column + node always has s_7 = symbol 'column' and s_6 = symbol 'node'
// (the full expansion of Fig. 3), and the instantiating logic wires them as
// constants.
//
// Write: when we is high, wdata[n] is stored as the level-wlev symbol of
// path P*wcol + n (one group of four per cycle, from the enumeration units).
// Reads, combinational: the level-rlev_d symbols of group rcol_d (for the PED
// units), every stored level of group rcol_b (for the b_i units) and the whole
// array (the final candidate list). A read in the cycle of a write returns the
// old value. Synchronous reset to zero.
module path_history_cache
  import fsd_pkg::*;
#(
  parameter int P     = FSD_P,
  parameter int NCAND = FSD_NCAND,
  parameter int NPATH = FSD_NPATH
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       we,
  input  logic [$clog2(NCAND/P)-1:0] wcol,
  input  logic [$clog2(NPATH)-1:0]   wlev,
  input  sym_t                       wdata  [P],
  input  logic [$clog2(NCAND/P)-1:0] rcol_d,
  input  logic [$clog2(NPATH)-1:0]   rlev_d,
  output sym_t                       rdata_d [P],
  input  logic [$clog2(NCAND/P)-1:0] rcol_b,
  output sym_t                       rpath_b [P][NPATH],
  output sym_t                       all     [NCAND][NPATH]
);
  sym_t mem [NCAND][NPATH];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < NCAND; k++)
        for (int l = 0; l < NPATH; l++) mem[k][l] <= SYM_M3;
    end else if (we) begin
      for (int n = 0; n < P; n++) mem[P*int'(wcol)+n][wlev] <= wdata[n];
    end
  end

  always_comb begin
    for (int n = 0; n < P; n++) begin
      rdata_d[n] = mem[P*int'(rcol_d)+n][rlev_d];
      for (int l = 0; l < NPATH; l++) rpath_b[n][l] = mem[P*int'(rcol_b)+n][l];
    end
    for (int k = 0; k < NCAND; k++)
      for (int l = 0; l < NPATH; l++) all[k][l] = mem[k][l];
  end

  a_wlev_range: assert property (@(posedge clk) disable iff (!rst_n) we |-> int'(wlev) < NPATH)
    else $error("path_history_cache: write to level %0d", wlev);

endmodule
