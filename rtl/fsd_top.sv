// fsd_top: four-nodes-per-cycle fixed-complexity sphere decoder (FSD) for a
// 4x4 MIMO channel with 16-QAM, real-valued model, node distribution
// {1,1,1,1,1,1,4,4} and a 16-entry candidate list.
//
// Given the upper-triangular R of the QR decomposition of the channel and the
// rotated receive vector y^ZF = Q^H y, the detector walks the 8-level search
// tree: both top levels (7 and 6) are fully expanded into 16 paths, and each
// path is then extended one level at a time by its best child (direct
// enumeration). Four nodes, one dashed group of the tree figure, are handled
// per cycle, and the three tasks of a node are spread over three cycles so
// that the units of one cycle never wait on each other:
//
//   di_unit  x4 : PED of group G(L,c)            d_i = d_{i+1} + |b_i - R_ii s_i|^2
//   bi_unit  x4 : b for group G(L-1,c)           b_{i-1} from the path symbols
//   de_unit  x4 : best child of the group whose b was written the cycle before
//
// The b_i cache, path history cache and PED cache (16 entries each) carry the
// per-path state between these steps; fsd_ctrl steps the level and column
// counters. One traversal takes 30 cycles: one start cycle, then 1 + 7 x 4
// = 29 cycles of groups. Entry k = 4*c + n of each cache is path k, whose two
// top symbols are fixed, s_7 = code c and s_6 = code n, and are wired here as
// constants rather than stored.
//
// Interface: r_mat[i][j] = R_{i,j} (only j >= i is read) and y_zf[i] =
// y_i^ZF, W-bit two's complement with FRAC fractional bits; they must stay
// stable from the start cycle (the one after 'start' is taken) through the
// last cycle before 'done', which assertions check. They come from a QR
// front end that is not part of this design. 'start'/'ready'/'done' are
// described in fsd_ctrl. After 'done', cand_sym[k][i] is the symbol code of
// level i of candidate k (0:-3, 1:-1, 2:+1, 3:+3) and cand_ped[k] its
// squared distance, W-bit unsigned, saturated. The unit structure, the
// schedule and the cache sizes follow the paper; the handshake, fixed-point
// scaling and symbol code are this design's. The symbol outputs of levels 7
// and 6 are constants by construction (the full expansion of those levels).
module fsd_top
  import fsd_pkg::*;
#(
  parameter int W     = FSD_W,
  parameter int FRAC  = FSD_FRAC
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 ready,
  output logic                 busy,
  input  logic signed [W-1:0]  r_mat    [FSD_NLEV][FSD_NLEV],
  input  logic signed [W-1:0]  y_zf     [FSD_NLEV],
  output logic                 done,
  output sym_t                 cand_sym [FSD_NCAND][FSD_NLEV],
  output logic [W-1:0]         cand_ped [FSD_NCAND],
  output logic                 b_sat,    // a b_i unit saturated this cycle
  output logic                 d_sat     // a d_i unit saturated this cycle
);
  localparam int NLEV  = FSD_NLEV;
  localparam int P     = FSD_P;
  localparam int NCAND = FSD_NCAND;
  localparam int NPATH = FSD_NPATH;
  localparam int NCOL  = NCAND / P;
  localparam int LW    = $clog2(NLEV);
  localparam int CW    = $clog2(NCOL);
  localparam int PLW   = $clog2(NPATH);

  // ---------------------------------------------------------------- control
  logic          init, run, top, b_en, de_valid;
  logic [LW-1:0] level, de_level, b_level;
  logic [CW-1:0] col, de_col;

  fsd_ctrl #(.NLEV(NLEV), .NCOL(NCOL)) u_ctrl (
    .clk, .rst_n, .start, .ready, .busy, .init, .run, .level, .col, .top,
    .b_en, .de_valid, .de_level, .de_col, .done
  );

  assign b_level = level - 1'b1;

  // ----------------------------------------------------------------- caches
  logic signed [W-1:0] b_wdata [P], b_crt [P], b_prv [P];
  logic [W-1:0]        d_new [P], d_par_raw [P], d_par [P], ped_all [NCAND];
  sym_t                s_de [P], s_lvl [P], path_b [P][NPATH], path_all [NCAND][NPATH];

  bi_cache #(.W(W), .P(P), .NCAND(NCAND)) u_bi_cache (
    .clk, .rst_n,
    .load     (init),
    .y7       (y_zf[NLEV-1]),
    .we       (b_en),
    .bcast    (top),
    .wcol     (col),
    .wdata    (b_wdata),
    .rcol_crt (col),
    .rdata_crt(b_crt),
    .rcol_prv (de_col),
    .rdata_prv(b_prv)
  );

  path_history_cache #(.P(P), .NCAND(NCAND), .NPATH(NPATH)) u_path (
    .clk, .rst_n,
    .we     (de_valid),
    .wcol   (de_col),
    .wlev   (PLW'(de_level)),
    .wdata  (s_de),
    .rcol_d (col),
    .rlev_d (PLW'(level)),
    .rdata_d(s_lvl),
    .rcol_b (col),
    .rpath_b(path_b),
    .all    (path_all)
  );

  ped_cache #(.W(W), .P(P), .NCAND(NCAND)) u_ped (
    .clk, .rst_n,
    .we    (run),
    .bcast (top),
    .wcol  (col),
    .wdata (d_new),
    .rcol  (col),
    .rdata (d_par_raw),
    .all   (ped_all)
  );

  // ------------------------------------------------------ arithmetic units
  logic [P-1:0] bs_n, ds_n;   // per-unit saturation flags
  for (genvar n = 0; n < P; n++) begin : g_node
    // b_i unit: b_{L-1} for path P*col+n (at the top level: for group n).
    logic signed [W-1:0] r_row [1:NLEV-1];
    sym_t                s_b   [1:NLEV-1];
    sym_t                s_d;

    always_comb begin
      for (int j = 1; j < NLEV; j++) r_row[j] = r_mat[b_level][j];
      for (int j = 1; j < NPATH + 1; j++) s_b[j] = path_b[n][j];
      s_b[NLEV-2] = sym_t'(n);
      s_b[NLEV-1] = top ? sym_t'(n) : sym_t'(col);
    end

    bi_unit #(.W(W), .NLEV(NLEV)) u_bi (
      .r_row(r_row),
      .s    (s_b),
      .level(b_level),
      .y_zf (y_zf[b_level]),
      .b    (b_wdata[n]),
      .sat  (bs_n[n])
    );

    // Direct enumeration on the group whose b was written last cycle.
    de_unit #(.W(W)) u_de (
      .r_ii (r_mat[de_level][de_level]),
      .b    (b_prv[n]),
      .s_hat(s_de[n]),
      .abs_e()
    );

    // PED of node n of the current group; top two symbols are wired.
    always_comb begin
      s_d      = (int'(level) >= NLEV - 2) ? sym_t'(n) : s_lvl[n];
      d_par[n] = top ? '0 : d_par_raw[n];
    end

    di_unit #(.W(W), .FRAC(FRAC)) u_di (
      .r_ii    (r_mat[level][level]),
      .s       (s_d),
      .b       (b_crt[n]),
      .d_parent(d_par[n]),
      .d       (d_new[n]),
      .sat     (ds_n[n])
    );
  end

  // ----------------------------------------------------------------- output
  always_comb begin
    b_sat = b_en && (|bs_n);
    d_sat = run && (|ds_n);
    for (int k = 0; k < NCAND; k++) begin
      for (int l = 0; l < NPATH; l++) cand_sym[k][l] = path_all[k][l];
      cand_sym[k][NLEV-2] = sym_t'(k % P);
      cand_sym[k][NLEV-1] = sym_t'(k / P);
      cand_ped[k] = ped_all[k];
    end
  end

  // ------------------------------------------------------------ interface
  // R and y^ZF are read throughout the traversal and must not change once
  // the start cycle has passed.
  for (genvar i = 0; i < NLEV; i++) begin : g_chk
    a_y_stable: assert property (@(posedge clk) disable iff (!rst_n) run |-> $stable(y_zf[i]))
      else $error("fsd_top: y_zf[%0d] changed during a traversal", i);
    for (genvar j = i; j < NLEV; j++) begin : g_chk_r
      a_r_stable: assert property (@(posedge clk) disable iff (!rst_n) run |-> $stable(r_mat[i][j]))
        else $error("fsd_top: r_mat[%0d][%0d] changed during a traversal", i, j);
    end
  end

endmodule
