// fsd_ref_pkg: bit-exact reference model of the fixed-complexity sphere
// decoder, written directly from the algorithm with plain integers, for the
// testbenches. It shares no code with the RTL.
//
// Number format: R, y^ZF and b are W-bit two's complement; PEDs W-bit
// unsigned; a squared error is shifted right by FRAC bits before it is added.
// b is saturated to W bits, |e| is clipped to W bits for enumeration, a PED
// is clipped to its maximum. Ties in enumeration go to the first of the order
// +3, +1, -1, -3.
package fsd_ref_pkg;

  localparam int W     = 12;
  localparam int FRAC  = 6;
  localparam int NLEV  = 8;
  localparam int NCAND = 16;

  localparam int SMAX = 2 ** (W - 1) - 1;
  localparam int SMIN = -(2 ** (W - 1));
  localparam int UMAX = 2 ** W - 1;

  typedef int row_t [NLEV];
  typedef int mat_t [NLEV][NLEV];

  // Symbol code -> value, code order -3, -1, +1, +3.
  function automatic int sym_val(int code);
    return 2 * code - 3;
  endfunction

  function automatic int sat_signed(longint x);
    if (x > SMAX) return SMAX;
    if (x < SMIN) return SMIN;
    return int'(x);
  endfunction

  function automatic int iabs(int x);
    return x < 0 ? -x : x;
  endfunction

  // b_i = y_i - sum_{j>i} R_ij s_j, saturated. s[] holds symbol values.
  function automatic int ref_b(row_t r, row_t s, int i, int y);
    longint acc = y;
    for (int j = i + 1; j < NLEV; j++) acc -= longint'(r[j]) * s[j];
    return sat_signed(acc);
  endfunction

  function automatic int clip_mag(int e);
    return iabs(e) > UMAX ? UMAX : iabs(e);
  endfunction

  // Enumeration: symbol code minimising |b - r s|.
  function automatic int ref_de(int r, int b);
    int order [4] = '{3, 2, 1, 0};
    int best = order[0];
    int bm = clip_mag(b - r * sym_val(order[0]));
    for (int k = 1; k < 4; k++) begin
      int m = clip_mag(b - r * sym_val(order[k]));
      if (m < bm) begin
        bm = m;
        best = order[k];
      end
    end
    return best;
  endfunction

  function automatic int ref_de_mag(int r, int b);
    return clip_mag(b - r * sym_val(ref_de(r, b)));
  endfunction

  // d_i = d_{i+1} + (e^2 >> FRAC), clipped; *sat tells whether it clipped.
  function automatic int ref_d(int r, int code, int b, int dpar, output bit sat);
    longint e = longint'(b) - longint'(r) * sym_val(code);
    longint acc = longint'(dpar) + ((e * e) >>> FRAC);
    sat = acc > UMAX;
    return sat ? UMAX : int'(acc);
  endfunction

  // Whole FSD with node distribution {11111144}. cand[k][i] is the symbol
  // code of level i of candidate k = 4*c7 + c6.
  function automatic void ref_fsd(mat_t r, row_t y, output int cand [NCAND][NLEV],
                                  output int ped [NCAND], output int n_bsat,
                                  output int n_dsat);
    n_bsat = 0;
    n_dsat = 0;
    for (int k = 0; k < NCAND; k++) begin
      row_t s;
      int d;
      bit sat;
      foreach (s[j]) s[j] = 0;
      cand[k][7] = k / 4;
      cand[k][6] = k % 4;
      d = 0;
      for (int i = NLEV - 1; i >= 0; i--) begin
        int b;
        row_t rr;
        foreach (rr[j]) rr[j] = r[i][j];
        b = ref_b(rr, s, i, y[i]);
        if (i < NLEV - 1) begin
          longint raw = y[i];
          for (int j = i + 1; j < NLEV; j++) raw -= longint'(r[i][j]) * s[j];
          if (raw != b) n_bsat++;
        end
        if (i < 6) cand[k][i] = ref_de(r[i][i], b);
        s[i] = sym_val(cand[k][i]);
        d = ref_d(r[i][i], cand[k][i], b, d, sat);
        if (sat) n_dsat++;
      end
      ped[k] = d;
    end
  endfunction

endpackage
