// ept: Erase-timing Parameter Table.
//
// Holds the predicted minimum erase-pulse latency m_tEP(n) for erase loop n
// (n = 1..MAX_LOOPS, the V_ERASE step about to be applied) as a function of
// the fail-bit range of the verify-read that preceded it. Entries are tEP
// codes in 0.5 ms units (0..7). An entry of 0 means the loop is not needed at
// all: the block already meets the RBER requirement through the ECC margin.
// Row 1 is the remainder erasure that follows a 1 ms shallow erasure at
// V_ERASE(1), so its largest value is 5 (2.5 ms, completing the 3.5 ms loop).
//
// The reset contents are the paper's final latency model: with
// AGGRESSIVE = 1 the right-hand values of each cell (process variation plus
// ECC-capability margin, the main configuration), with AGGRESSIVE = 0 the
// left-hand, conservative values. Column 8 (F above F_HIGH = 7*delta) holds the
// default full pulse; the paper gives it only in its implementation figure
// ("> 7 delta: 3.5 ms", and 2.5 ms for the remainder after shallow erasure).
// The paper sizes the table at 35 entries (7 tEP values x 5 loops); this
// layout stores the 5 x 9 cells of the model directly instead.
//
// Interface: a combinational lookup port (lk_loop, lk_range -> lk_tep) and a
// synchronous write port (wr_en, wr_loop, wr_range, wr_tep) through which
// firmware can load a table profiled for another chip type. Out-of-range
// lookups return the default tEP. Reset is synchronous to clk, active low.
module ept
  import aero_pkg::*;
#(
  parameter bit AGGRESSIVE = 1'b1
) (
  input  logic               clk,
  input  logic               rst_n,
  // lookup
  input  logic [LOOP_W-1:0]  lk_loop,   // 1..MAX_LOOPS
  input  logic [RANGE_W-1:0] lk_range,  // 0..8
  output logic [TEP_W-1:0]   lk_tep,
  // table load
  input  logic               wr_en,
  input  logic [LOOP_W-1:0]  wr_loop,
  input  logic [RANGE_W-1:0] wr_range,
  input  logic [TEP_W-1:0]   wr_tep
);

  // Reset contents, 0.5 ms units; index [loop-1][range].
  function automatic logic [TEP_W-1:0] model(input logic [LOOP_W-1:0] loop,
                                             input logic [RANGE_W-1:0] rng,
                                             input bit aggr);
    // conservative model (left value of each cell)
    int cons [MAX_LOOPS][NUM_RANGES] = '{
      '{1, 2, 3, 4, 5, 5, 5, 5, 5},
      '{1, 2, 3, 4, 5, 6, 7, 7, 7},
      '{1, 2, 3, 4, 5, 6, 7, 7, 7},
      '{1, 2, 3, 4, 5, 6, 7, 7, 7},
      '{1, 2, 3, 4, 5, 6, 7, 7, 7}};
    // aggressive model (right value of each cell)
    int aggv [MAX_LOOPS][NUM_RANGES] = '{
      '{0, 0, 1, 2, 3, 4, 5, 5, 5},
      '{0, 0, 1, 2, 3, 4, 5, 6, 7},
      '{0, 0, 1, 2, 3, 4, 5, 6, 7},
      '{0, 1, 2, 3, 4, 5, 6, 7, 7},
      '{1, 2, 3, 4, 5, 6, 7, 7, 7}};
    return aggr ? TEP_W'(aggv[loop][rng]) : TEP_W'(cons[loop][rng]);
  endfunction

  logic [TEP_W-1:0] table_q [MAX_LOOPS][NUM_RANGES];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int l = 0; l < MAX_LOOPS; l++)
        for (int r = 0; r < NUM_RANGES; r++)
          table_q[l][r] <= model(LOOP_W'(l), RANGE_W'(r), AGGRESSIVE);
    end else if (wr_en && wr_loop >= 1 && wr_loop <= LOOP_W'(MAX_LOOPS)
                 && wr_range < RANGE_W'(NUM_RANGES)) begin
      table_q[wr_loop - 1][wr_range] <= wr_tep;
    end
  end

  always_comb begin
    lk_tep = TEP_DEFAULT;
    if (lk_loop >= 1 && lk_loop <= LOOP_W'(MAX_LOOPS) && lk_range < RANGE_W'(NUM_RANGES))
      lk_tep = table_q[lk_loop - 1][lk_range];
  end

endmodule
