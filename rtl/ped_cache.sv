// ped_cache: register file holding the PED of the node last visited on each
// of the NCAND paths. At the end of a traversal it holds the final PED of
// every list candidate, which the soft-output (LLR) stage reads.
//
// NCAND entries of W bits (16 x 12 = 192 flip-flops, as in the paper); entry
// P*column + node belongs to node 'node' of group 'column'. Writes:
//   we, bcast - wdata[n] goes to all P entries of group n (the four level-7
//               PEDs, each the parent PED of a whole level-6 group);
//   we        - wdata[n] goes to entry P*wcol + n, replacing the parent's
//               PED by the child's.
// Reads: one combinational group port (the parent PEDs d_{i+1} of the group
// being visited) and the whole array for the output. A read in the cycle of a
// write returns the old value. Synchronous reset to zero.
module ped_cache
  import fsd_pkg::*;
#(
  parameter int W     = FSD_W,
  parameter int P     = FSD_P,
  parameter int NCAND = FSD_NCAND
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       we,
  input  logic                       bcast,
  input  logic [$clog2(NCAND/P)-1:0] wcol,
  input  logic [W-1:0]               wdata [P],
  input  logic [$clog2(NCAND/P)-1:0] rcol,
  output logic [W-1:0]               rdata [P],
  output logic [W-1:0]               all   [NCAND]
);
  logic [W-1:0] mem [NCAND];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < NCAND; k++) mem[k] <= '0;
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
    for (int n = 0; n < P; n++) rdata[n] = mem[P*int'(rcol)+n];
    for (int k = 0; k < NCAND; k++) all[k] = mem[k];
  end

endmodule
