// fsd_pkg: constants, types and small helper functions shared by the
// four-nodes-per-cycle fixed-complexity sphere decoder (FSD).
//
// The detector works on the real-valued model of a 4x4 MIMO channel with
// 16-QAM, so the search tree has 8 levels (i = 7 .. 0) and every real symbol
// takes one of the four values {-3,-1,+1,+3}. Node distribution {11111144}:
// the two top levels are fully expanded (4 x 4 = 16 paths), each lower level
// keeps one child per path, so the list has 16 candidates. Four nodes are
// processed per cycle. All arithmetic data are 12 bits wide.
//
// Symbol code (this design's choice; the paper does not give one): a 2-bit
// index into the left-to-right order of the tree figure, -3,-1,+1,+3.
// Fixed point (also this design's choice): R, y^ZF and b_i are two's
// complement with FRAC fractional bits; PEDs are unsigned with the same
// scaling, so a squared error is shifted right by FRAC before accumulation.
package fsd_pkg;

  localparam int FSD_W     = 12;  // internal data width (paper)
  localparam int FSD_NLEV  = 8;   // tree levels, 2*Nt for Nt = 4 (paper)
  localparam int FSD_P     = 4;   // nodes processed per cycle (paper)
  localparam int FSD_NCAND = 16;  // list size (paper)
  localparam int FSD_NPATH = 6;   // levels kept in the path history cache (paper)
  localparam int FSD_FRAC  = 6;   // fractional bits of the fixed-point format (assumed)

  typedef logic [1:0] sym_t;   // 0:-3  1:-1  2:+1  3:+3

  localparam sym_t SYM_M3 = 2'd0;
  localparam sym_t SYM_M1 = 2'd1;
  localparam sym_t SYM_P1 = 2'd2;
  localparam sym_t SYM_P3 = 2'd3;

  // Integer value of a symbol code.
  function automatic int sym_value(sym_t s);
    case (s)
      SYM_M3:  return -3;
      SYM_M1:  return -1;
      SYM_P1:  return 1;
      default: return 3;
    endcase
  endfunction

endpackage
