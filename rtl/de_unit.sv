// de_unit: direct enumeration for one node (paper Fig. 7).
//
// Chooses, among the four children of a node, the symbol s in
// {+3,+1,-1,-3} that minimises |b_i - R_{i,i} s|, i.e. the child with the
// smallest error term and hence the smallest PED increment. R_{i,i} is
// multiplied by the four constants with shifts and adds (3R = R + 2R), the
// four products are subtracted from b_i, and two levels of W-bit ">"
// comparators pick the minimum: first (+3,+1) and (-1,-3), then the two
// winners. A multiplexer returns the winning symbol code.
//
// The magnitudes are clipped to W bits before the W-bit comparators, and a
// tie keeps the first operand of a comparator (+3 before +1, -1 before -3,
// the upper pair before the lower); both are this design's choices.
//
// Interface: r_ii = R_{i,i}, b = b_i; s_hat is the chosen symbol code and
// abs_e the clipped |e_i| of that symbol. Purely combinational.
module de_unit
  import fsd_pkg::*;
#(
  parameter int W = FSD_W
) (
  input  logic signed [W-1:0] r_ii,
  input  logic signed [W-1:0] b,
  output sym_t                s_hat,
  output logic [W-1:0]        abs_e
);
  localparam int WE = W + 3;
  localparam logic [WE-1:0] MAGMAX = WE'((2 ** W) - 1);

  logic signed [WE-1:0] r1, r2, r3;
  logic signed [WE-1:0] e_p3, e_p1, e_m1, e_m3;
  logic [W-1:0] m_p3, m_p1, m_m1, m_m3;
  logic [W-1:0] m_hi, m_lo;
  sym_t s_hi, s_lo;

  function automatic logic [W-1:0] clip_abs(logic signed [WE-1:0] e);
    logic [WE-1:0] m;
    m = (e < 0) ? WE'(-e) : WE'(e);
    return (m > MAGMAX) ? MAGMAX[W-1:0] : m[W-1:0];
  endfunction

  always_comb begin
    r1 = WE'(r_ii);
    r2 = r1 <<< 1;
    r3 = r1 + r2;
    e_p3 = WE'(b) - r3;
    e_p1 = WE'(b) - r1;
    e_m1 = WE'(b) + r1;
    e_m3 = WE'(b) + r3;
    m_p3 = clip_abs(e_p3);
    m_p1 = clip_abs(e_p1);
    m_m1 = clip_abs(e_m1);
    m_m3 = clip_abs(e_m3);
    // First comparator level.
    if (m_p3 > m_p1) begin s_hi = SYM_P1; m_hi = m_p1; end
    else             begin s_hi = SYM_P3; m_hi = m_p3; end
    if (m_m1 > m_m3) begin s_lo = SYM_M3; m_lo = m_m3; end
    else             begin s_lo = SYM_M1; m_lo = m_m1; end
    // Second comparator level and output multiplexer.
    if (m_hi > m_lo) begin s_hat = s_lo; abs_e = m_lo; end
    else             begin s_hat = s_hi; abs_e = m_hi; end
  end

endmodule
