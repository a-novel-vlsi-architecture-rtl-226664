// bi_unit: computes b_i for one tree node,
//
//     b_i = y_i^ZF - sum_{j=i+1}^{7} R_{i,j} * s_j ,
//
// the value the node's children need for their error terms
// e_i = b_i - R_{i,i} s_i.
//
// How it works (follows the paper's first b_i solution, Fig. 5): since every
// real 16-QAM symbol is one of {+3,+1,-1,-3}, each product R_{i,j} s_j is
// split into two summands picked by two 4:1 multiplexers, with no adder:
//     s = +3 : 2R and  R      s = +1 : 0 and  R
//     s = -1 : 0 and -R       s = -3 : -2R and -R
// The 7 x 2 = 14 summands go, unadded, into a Wallace tree of carry-save
// adders (six levels for 14 operands) and a single ripple-carry adder
// produces the sum. Summands with j <= i are forced to zero, so one unit
// serves every level. The subtraction from y_i^ZF and the saturation of b_i
// to W bits are this design's choices (the paper shows only the sum); the
// tree runs WS = W + 6 bits wide so no intermediate value wraps.
//
// Interface: r_row[j] = R_{i,j} and s[j] = code of s_j for j = 1..NLEV-1,
// level = i, y_zf = y_i^ZF; b is the saturated result, sat flags that
// saturation took place. Purely combinational (the b_i cache registers it).
module bi_unit
  import fsd_pkg::*;
#(
  parameter int W    = FSD_W,
  parameter int NLEV = FSD_NLEV
) (
  input  logic signed [W-1:0]           r_row [1:NLEV-1],
  input  sym_t                          s     [1:NLEV-1],
  input  logic [$clog2(NLEV)-1:0]       level,
  input  logic signed [W-1:0]           y_zf,
  output logic signed [W-1:0]           b,
  output logic                          sat
);
  localparam int WS = W + 6;
  localparam int N  = 2 * (NLEV - 1);

  logic [WS-1:0] summand [N];
  logic [WS-1:0] tree_sum, tree_carry, sigma;

  // Multiplication-to-addition converters (two muxes per product).
  always_comb begin
    for (int j = 1; j < NLEV; j++) begin
      logic signed [WS-1:0] r1, r2;
      r1 = WS'(r_row[j]);
      r2 = r1 <<< 1;
      if (j > int'(level)) begin
        case (s[j])
          SYM_P3:  begin summand[2*(j-1)] = r2;       summand[2*(j-1)+1] = r1;  end
          SYM_P1:  begin summand[2*(j-1)] = '0;       summand[2*(j-1)+1] = r1;  end
          SYM_M1:  begin summand[2*(j-1)] = '0;       summand[2*(j-1)+1] = -r1; end
          default: begin summand[2*(j-1)] = -r2;      summand[2*(j-1)+1] = -r1; end
        endcase
      end else begin
        summand[2*(j-1)]   = '0;
        summand[2*(j-1)+1] = '0;
      end
    end
  end

  csa_tree #(.N(N), .WS(WS)) u_tree (
    .op   (summand),
    .sum  (tree_sum),
    .carry(tree_carry)
  );

  rca #(.WS(WS)) u_rca (
    .a(tree_sum),
    .b(tree_carry),
    .s(sigma)
  );

  // b_i = y_i^ZF - sum, saturated to W bits.
  localparam logic signed [WS-1:0] BMAX = WS'((2 ** (W - 1)) - 1);
  localparam logic signed [WS-1:0] BMIN = -WS'(2 ** (W - 1));
  logic signed [WS-1:0] b_full;

  always_comb begin
    b_full = WS'(y_zf) - $signed(sigma);
    sat    = 1'b0;
    if (b_full > BMAX) begin
      b   = BMAX[W-1:0];
      sat = 1'b1;
    end else if (b_full < BMIN) begin
      b   = BMIN[W-1:0];
      sat = 1'b1;
    end else begin
      b = b_full[W-1:0];
    end
  end

endmodule
