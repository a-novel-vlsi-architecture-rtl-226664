// csa32: one carry-save (3:2) adder row of width WS.
// Reduces three operands to a sum word and a carry word with
// a + b + c == sum + carry (mod 2^WS). Purely combinational.
module csa32 #(
  parameter int WS = 18
) (
  input  logic [WS-1:0] a,
  input  logic [WS-1:0] b,
  input  logic [WS-1:0] c,
  output logic [WS-1:0] sum,
  output logic [WS-1:0] carry
);
  // The carry word is the majority shifted up one place; the majority of the
  // top bit would leave the WS-bit word and is not formed.
  always_comb begin
    sum   = a ^ b ^ c;
    carry = {(a[WS-2:0] & b[WS-2:0]) | (a[WS-2:0] & c[WS-2:0]) | (b[WS-2:0] & c[WS-2:0]), 1'b0};
  end
endmodule
