// fsd_ctrl: control unit of the four-nodes-per-cycle FSD.
//
// Sequences one tree traversal with a 3-bit level counter and a 2-bit
// column counter, as the paper describes. The traversal is breadth-first and
// zig-zag (left to right within a level, then down one level):
//
//   start cycle : y_7^ZF is loaded into the b_i cache (level 7, column 0)
//   cycle 1     : level 7, column 0   - the four root children
//   cycles 2-29 : level 6 .. 0, columns 0 .. 3, one group of four per cycle
//
// so a traversal takes 1 + 29 = 30 cycles. In the cycle at (level L,
// column c) the PED units work on group G(L,c) and the b_i units on group
// G(L-1,c); the enumeration units work on the group whose b was written in
// the previous cycle, whose level and column are kept in the registered
// de_* outputs. Enumeration results for level 6 are not needed (that level
// is fully expanded) and de_valid stays low for them; the b_i units have no
// work at level 0. This reproduces the task table of the paper (Table I).
//
// Handshake (this design's choice): 'ready' is high when idle and in the
// last cycle of a traversal; a 'start' seen while ready begins a traversal
// in the next cycle, so back-to-back traversals follow each other every 30
// cycles. 'done' is high for one cycle after the last PED write, when the
// candidate list and PEDs are complete; those stay valid until cycle 1 of
// the next traversal overwrites the PED cache. A 'start' while not ready is
// ignored. Synchronous active-low reset.
module fsd_ctrl
  import fsd_pkg::*;
#(
  parameter int NLEV  = FSD_NLEV,
  parameter int NCOL  = FSD_NCAND / FSD_P
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      ready,
  output logic                      busy,
  output logic                      init,      // start cycle: load y_7^ZF
  output logic                      run,       // cycles 1 .. 29
  output logic [$clog2(NLEV)-1:0]   level,     // level counter
  output logic [$clog2(NCOL)-1:0]   col,       // column counter
  output logic                      top,       // run at the top level (broadcast writes)
  output logic                      b_en,      // b_i units produce a result this cycle
  output logic                      de_valid,  // enumeration result is to be stored
  output logic [$clog2(NLEV)-1:0]   de_level,
  output logic [$clog2(NCOL)-1:0]   de_col,
  output logic                      done
);
  typedef enum logic [1:0] {S_IDLE, S_INIT, S_RUN} state_t;

  localparam logic [$clog2(NLEV)-1:0] LTOP = $clog2(NLEV)'(NLEV - 1);
  localparam logic [$clog2(NCOL)-1:0] CLAST = $clog2(NCOL)'(NCOL - 1);

  state_t state;
  logic   last;

  always_comb begin
    run   = (state == S_RUN);
    init  = (state == S_INIT);
    busy  = (state != S_IDLE);
    top   = run && (level == LTOP);
    last  = run && (level == '0) && (col == CLAST);
    ready = (state == S_IDLE) || last;
    b_en  = run && (level != '0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      level    <= LTOP;
      col      <= '0;
      de_valid <= 1'b0;
      de_level <= '0;
      de_col   <= '0;
      done     <= 1'b0;
    end else begin
      done <= last;
      // The b_i units write level-1 results for group (level-1, col); they
      // need enumeration next cycle unless level-1 is fully expanded.
      de_valid <= b_en && (level != LTOP);
      de_level <= level - 1'b1;
      de_col   <= col;
      case (state)
        S_IDLE: if (start) begin
          state <= S_INIT;
          level <= LTOP;
          col   <= '0;
        end
        S_INIT: state <= S_RUN;
        default: begin
          if (level == LTOP) begin
            level <= level - 1'b1;
            col   <= '0;
          end else if (col == CLAST) begin
            col   <= '0;
            if (level == '0) begin
              level <= LTOP;
              state <= start ? S_INIT : S_IDLE;
            end else begin
              level <= level - 1'b1;
            end
          end else begin
            col <= col + 1'b1;
          end
        end
      endcase
    end
  end

  a_col_top: assert property (@(posedge clk) disable iff (!rst_n) top |-> col == '0)
    else $error("fsd_ctrl: top level visited at column %0d", col);

endmodule
