// rca: ripple-carry adder of width WS (a + b, modulo 2^WS).
// Written as an explicit chain of full adders, the carry-propagate adder
// that follows the CSA tree of the b_i unit. Purely combinational.
module rca #(
  parameter int WS = 18
) (
  input  logic [WS-1:0] a,
  input  logic [WS-1:0] b,
  output logic [WS-1:0] s
);
  logic [WS-1:0] c;   // carry into each bit; the carry out of the MSB is dropped

  assign c[0] = 1'b0;
  for (genvar k = 0; k < WS; k++) begin : g_fa
    assign s[k] = a[k] ^ b[k] ^ c[k];
    if (k < WS - 1) begin : g_c
      assign c[k+1] = (a[k] & b[k]) | (a[k] & c[k]) | (b[k] & c[k]);
    end
  end
endmodule
