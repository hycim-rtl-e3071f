// hycim_top -- HyCiM hybrid computing-in-memory QUBO solver for problems with one
// inequality constraint (quadratic knapsack: maximise x^T P x subject to
// w.x <= C).
//
// The solver minimises E = (w.x <= C) * x^T Q x with Q = -P. The SA logic
// proposes a configuration; the inequality filter (working array holding w,
// replica array encoding C, comparator) decides feasibility in a precharge +
// four-phase evaluation; the enable circuit sends feasible configurations to
// the CiM crossbar, which computes x^T P x bit-serially, and returns infeasible
// ones to the SA logic, which then skips the QUBO computation. The SA logic
// accepts or rejects the move and updates the temperature.
//
// Interface: the host erases/programs the crossbar (xb_*), programs the filter
// cells (flt_*), loads the replica configuration x' (rx_*), then pulses
// sa_start with x_init, num_iters, t_init, t_shift and seed. sa_done pulses at
// the end with x_o / e_o. Timing per SA iteration: 2 + 7 + 1 + 1 cycles for an
// infeasible x_new, 2 + 7 + 1 + (M + 3) + 3 for a feasible one (M = 7: 23).
// The block structure follows the paper; cycle timing, the programming ports
// and the annealing schedule are this design's own.
module hycim_top
  import hycim_pkg::*;
#(
  parameter int unsigned N        = N_ITEMS_DEF,
  parameter int unsigned ROWS     = FILTER_ROWS_DEF,
  parameter int unsigned LEVELS   = CELL_LEVELS_DEF,
  parameter int unsigned M        = QBITS_DEF,
  parameter int unsigned ADC_BITS = $clog2(N + 1),
  parameter int unsigned IW       = 16,
  parameter int unsigned TW       = 24,
  localparam int unsigned WB      = $clog2(LEVELS + 1),
  localparam int unsigned PW      = $clog2(N * N * ((1 << M) - 1) + 1),
  localparam int unsigned EW      = PW + 1,
  localparam int unsigned MLW     = $clog2(ROWS * LEVELS * N + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // crossbar programming
  input  logic                    xb_erase,
  input  logic                    xb_wr_en,
  input  logic [$clog2(N)-1:0]    xb_wr_row,
  input  logic [$clog2(N)-1:0]    xb_wr_col,
  input  logic [M-1:0]            xb_wr_data,
  // inequality filter programming
  input  logic                    flt_wr_en,
  input  logic                    flt_wr_replica,
  input  logic [$clog2(ROWS)-1:0] flt_wr_row,
  input  logic [$clog2(N)-1:0]    flt_wr_col,
  input  logic [WB-1:0]           flt_wr_data,
  input  logic                    rx_load,
  input  logic [N-1:0]            rx_data,
  // annealing run
  input  logic                    sa_start,
  input  logic [N-1:0]            x_init,
  input  logic [IW-1:0]           num_iters,
  input  logic [TW-1:0]           t_init,
  input  logic [4:0]              t_shift,
  input  logic [31:0]             seed,
  output logic                    sa_busy,
  output logic                    sa_done,
  output logic [N-1:0]            x_o,
  output logic signed [EW-1:0]    e_o,
  output logic [IW-1:0]           iter,
  output logic [TW-1:0]           temp,
  output sa_event_t               ev,
  // observation of the filter match lines
  output logic [MLW-1:0]          ml_work,
  output logic [MLW-1:0]          ml_replica
);

  logic          flt_start, flt_busy, flt_done, flt_feasible;
  logic [N-1:0]  x_new, flt_x, xb_x;
  logic          xb_start, xb_busy, xb_done, infeasible;
  logic [PW-1:0] qubo;

  sa_logic #(.N(N), .PW(PW), .IW(IW), .TW(TW)) u_sa (
    .clk, .rst_n, .start(sa_start), .x_init, .num_iters, .t_init, .t_shift, .seed,
    .busy(sa_busy), .done(sa_done), .x_o, .e_o, .iter, .temp, .ev,
    .flt_start, .x_new, .infeasible, .qubo_done(xb_done), .qubo
  );

  inequality_filter #(.N(N), .ROWS(ROWS), .LEVELS(LEVELS)) u_filter (
    .clk, .rst_n,
    .wr_en(flt_wr_en), .wr_replica(flt_wr_replica), .wr_row(flt_wr_row),
    .wr_col(flt_wr_col), .wr_data(flt_wr_data), .rx_load, .rx_data,
    .start(flt_start), .x_in(x_new), .busy(flt_busy), .done(flt_done),
    .feasible(flt_feasible), .x_out(flt_x), .ml_work, .ml_replica
  );

  enable_circuit #(.N(N)) u_enable (
    .clk, .rst_n, .flt_done, .flt_feasible, .flt_x,
    .xb_start, .xb_x, .infeasible
  );

  cim_crossbar #(.N(N), .M(M), .ADC_BITS(ADC_BITS)) u_xbar (
    .clk, .rst_n, .erase(xb_erase), .wr_en(xb_wr_en), .wr_row(xb_wr_row),
    .wr_col(xb_wr_col), .wr_data(xb_wr_data), .start(xb_start), .x(xb_x),
    .busy(xb_busy), .done(xb_done), .qubo
  );

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
                                 flt_start |-> !flt_busy && !xb_busy);

endmodule
