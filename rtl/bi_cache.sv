// bi_cache: register file holding the b_i value of each of the NCAND paths.
//
// The breadth-first schedule computes b_{i-1} for a group of P paths in the
// same cycle the PED of those paths at level i is formed, and the value is
// only consumed up to four cycles later, so it is parked here. The cache has
// NCAND entries of W bits (16 x 12 = 192 flip-flops, as in the paper);
// entry 4*column + node belongs to node 'node' of group 'column'.
//
// Write side (one write per cycle, checked by an assertion):
//   load      - the input multiplexer selects y_7^ZF and writes it into the
//               entries of group 0 (b_7 = y_7^ZF is shared by the four top
//               nodes). The paper loads y_7^ZF "at reset"; here it is done in
//               the extra start cycle of every traversal.
//   we, bcast - broadcast: wdata[n] goes to all P entries of group n. Used
//               once per traversal, for b_6, which all four children of a
//               level-7 node share.
//   we        - otherwise wdata[n] goes to entry P*wcol + n.
// Read side: two combinational group ports, 'crt' for the PED units (the
// group being visited) and 'prv' for the enumeration units (the group whose
// b was written in the previous cycle). A read in the cycle of a write to
// the same entry returns the old value. Synchronous reset to zero.
module bi_cache
  import fsd_pkg::*;
#(
  parameter int W     = FSD_W,
  parameter int P     = FSD_P,
  parameter int NCAND = FSD_NCAND
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  logic signed [W-1:0]      y7,
  input  logic                     we,
  input  logic                     bcast,
  input  logic [$clog2(NCAND/P)-1:0] wcol,
  input  logic signed [W-1:0]      wdata     [P],
  input  logic [$clog2(NCAND/P)-1:0] rcol_crt,
  output logic signed [W-1:0]      rdata_crt [P],
  input  logic [$clog2(NCAND/P)-1:0] rcol_prv,
  output logic signed [W-1:0]      rdata_prv [P]
);
  logic signed [W-1:0] mem [NCAND];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < NCAND; k++) mem[k] <= '0;
    end else if (load) begin
      for (int n = 0; n < P; n++) mem[n] <= y7;
    end else if (we) begin
      for (int n = 0; n < P; n++) begin
        if (bcast) begin
          for (int m = 0; m < P; m++) mem[P*n+m] <= wdata[n];
        end else begin
          mem[P*int'(wcol)+n] <= wdata[n];
        end
      end
    end
  end

  always_comb begin
    for (int n = 0; n < P; n++) begin
      rdata_crt[n] = mem[P*int'(rcol_crt)+n];
      rdata_prv[n] = mem[P*int'(rcol_prv)+n];
    end
  end

  a_one_write: assert property (@(posedge clk) disable iff (!rst_n) !(load && we))
    else $error("bi_cache: load and write in the same cycle");

endmodule
