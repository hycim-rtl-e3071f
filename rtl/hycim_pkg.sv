// hycim_pkg -- constants, types and small functions shared by the HyCiM solver.
//
// The defaults are the sizes of the evaluated configuration: 100 binary variables
// (quadratic knapsack items), a 16-row inequality-filter array whose multi-level
// cells hold a weight of 0..4 each (so one column holds an item weight of 0..64),
// and 7-bit QUBO matrix elements in the crossbar (largest element 100).
// The random-number and -log2 helpers belong to this design's own simulated
// annealing datapath; the paper does not specify how the annealer is built.
package hycim_pkg;

  // Evaluated problem size: 100 items per quadratic knapsack instance.
  localparam int unsigned N_ITEMS_DEF     = 100;
  // Inequality filter: 16 x 100 working and replica arrays.
  localparam int unsigned FILTER_ROWS_DEF = 16;
  // A filter cell stores w_ij in {0,1,2,3,4}: four read voltages, four phases.
  localparam int unsigned CELL_LEVELS_DEF = 4;
  // Crossbar: ceil(log2(100)) = 7 bits per QUBO element, one bit per cell.
  localparam int unsigned QBITS_DEF       = 7;

  // Phases of one inequality-filter iteration. Phase 1 applies Vread4 (lowest
  // voltage), phase 4 applies Vread1 (highest); SENSE clocks the latched
  // comparator, RESULT presents its decision for one cycle.
  typedef enum logic [2:0] {
    FLT_IDLE   = 3'd0,
    FLT_PRE    = 3'd1,
    FLT_PH1    = 3'd2,
    FLT_PH2    = 3'd3,
    FLT_PH3    = 3'd4,
    FLT_PH4    = 3'd5,
    FLT_SENSE  = 3'd6,
    FLT_RESULT = 3'd7
  } flt_state_t;

  // One-cycle event pulses of the annealer, one per SA iteration outcome.
  typedef struct packed {
    logic infeasible;     // x_new rejected by the inequality filter
    logic accept_better;  // E_new <  E_o, accepted
    logic accept_prob;    // E_new >= E_o, accepted with probability p
    logic reject_prob;    // E_new >= E_o, rejected
  } sa_event_t;

  // 32-bit xorshift (shifts 13, 17, 5); never reaches 0 from a non-zero state.
  function automatic logic [31:0] xorshift32(input logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  // -log2(u / 65536) for a 16-bit uniform sample u, as an unsigned Q5.8 number.
  // log2(u) = p + log2(1 + f) with p the leading-one position and f the
  // fraction below it; log2(1 + f) is approximated by f (error < 0.09).
  // u = 0 is treated as u = 1 and returns 16.0.
  function automatic logic [12:0] neg_log2_q8(input logic [15:0] u);
    logic [3:0]  p;
    logic [7:0]  frac;
    logic [12:0] lg;
    p = 4'd0;
    for (int b = 0; b < 16; b++) begin
      if (u[b]) p = 4'(b);
    end
    frac = 8'((u << (4'd15 - p)) >> 7);   // 8 bits below the leading one
    lg   = {1'b0, p, frac};               // p + f, Q4.8
    return 13'(16 << 8) - lg;
  endfunction

endpackage
