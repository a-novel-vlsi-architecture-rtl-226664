// di_unit: partial Euclidean distance of one node (paper Fig. 8).
//
//     e_i = b_i - R_{i,i} s_i          (M1: shift-and-add, 3R = R + 2R)
//     d_i = d_{i+1} + e_i^2            (M2: a plain multiplier)
//
// The error is recomputed here rather than stored by the enumeration unit,
// as the paper argues it costs less area. The square is brought back to the
// data scaling by a right shift of FRAC bits (the fixed-point format is this
// design's choice), added to the parent's PED, and the W-bit result is set
// to its maximum when the sum does not fit, as the paper describes.
//
// Interface: r_ii = R_{i,i}, s = code of s_i, b = b_i, d_parent = d_{i+1};
// d = d_i and sat flags a clipped result. Purely combinational.
module di_unit
  import fsd_pkg::*;
#(
  parameter int W    = FSD_W,
  parameter int FRAC = FSD_FRAC
) (
  input  logic signed [W-1:0] r_ii,
  input  sym_t                s,
  input  logic signed [W-1:0] b,
  input  logic [W-1:0]        d_parent,
  output logic [W-1:0]        d,
  output logic                sat
);
  localparam int WE = W + 3;
  localparam int WQ = 2 * WE;
  localparam logic [WQ:0] DMAX = (WQ + 1)'((2 ** W) - 1);

  logic signed [WE-1:0] r1, r2, rs, e;
  logic [WE-1:0] mag;
  logic [WQ-1:0] sq;
  logic [WQ:0]   acc;

  always_comb begin
    // M1: R_{i,i} * s_i without a multiplier.
    r1 = WE'(r_ii);
    r2 = r1 <<< 1;
    case (s)
      SYM_P3:  rs = r1 + r2;
      SYM_P1:  rs = r1;
      SYM_M1:  rs = -r1;
      default: rs = -r1 - r2;
    endcase
    e   = WE'(b) - rs;
    mag = (e < 0) ? WE'(-e) : WE'(e);
    // M2: square of |e_i|.
    sq  = WQ'(mag) * WQ'(mag);
    acc = (WQ + 1)'(sq >> FRAC) + (WQ + 1)'(d_parent);
    sat = acc > DMAX;
    d   = sat ? DMAX[W-1:0] : acc[W-1:0];
  end

endmodule
