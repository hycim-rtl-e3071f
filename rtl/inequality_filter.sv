// inequality_filter -- decides whether an input configuration x satisfies the
// knapsack inequality sum_i w_i x_i <= C.
//
// A working array holds the item weights w (column i holds w_i split over the
// ROWS cells of the column) and receives x. A replica array of the same size
// holds a precomputed weight vector w' and receives a fixed configuration x'
// chosen so that sum_i w'_i x'_i = C; its ML therefore ends at ML_FULL - C. Both
// arrays run the same precharge + four-phase staircase from one staircase_ctrl,
// and the comparator reports feasible when ML >= Replica ML. The structure
// (working array, replica array, two-stage comparator, four phases) is the
// paper's; the cycle timing and the programming ports are this design's own.
//
// Interface: wr_* programs one cell, of the replica array when wr_replica = 1.
// rx_load stores x' (rx_data). start (taken when idle) latches x_in in the input
// decoder register. done pulses for one cycle 7 cycles after start, together
// with feasible and x_out (the configuration that was evaluated).
module inequality_filter
  import hycim_pkg::*;
#(
  parameter int unsigned N      = N_ITEMS_DEF,
  parameter int unsigned ROWS   = FILTER_ROWS_DEF,
  parameter int unsigned LEVELS = CELL_LEVELS_DEF,
  localparam int unsigned WB    = $clog2(LEVELS + 1),
  localparam int unsigned MLW   = $clog2(ROWS * LEVELS * N + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // programming
  input  logic                    wr_en,
  input  logic                    wr_replica,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic [$clog2(N)-1:0]    wr_col,
  input  logic [WB-1:0]           wr_data,
  input  logic                    rx_load,
  input  logic [N-1:0]            rx_data,
  // evaluation
  input  logic                    start,
  input  logic [N-1:0]            x_in,
  output logic                    busy,
  output logic                    done,
  output logic                    feasible,
  output logic [N-1:0]            x_out,
  output logic [MLW-1:0]          ml_work,
  output logic [MLW-1:0]          ml_replica
);

  logic [N-1:0] x_reg;      // input decoder register
  logic [N-1:0] x_rep;      // fixed replica configuration x'
  logic         precharge, phase_en, sense, out_p, out_n;
  logic [2:0]   vread_sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_reg <= '0;
      x_rep <= '0;
    end else begin
      if (start && !busy) x_reg <= x_in;
      if (rx_load)        x_rep <= rx_data;
    end
  end

  staircase_ctrl u_ctrl (
    .clk, .rst_n, .start(start && !busy), .busy, .precharge, .phase_en,
    .vread_sel, .sense, .done
  );

  filter_array #(.N(N), .ROWS(ROWS), .LEVELS(LEVELS)) u_work (
    .clk, .rst_n,
    .wr_en(wr_en && !wr_replica), .wr_row, .wr_col, .wr_data,
    .x(x_reg), .precharge, .phase_en, .vread_sel, .ml(ml_work)
  );

  filter_array #(.N(N), .ROWS(ROWS), .LEVELS(LEVELS)) u_replica (
    .clk, .rst_n,
    .wr_en(wr_en && wr_replica), .wr_row, .wr_col, .wr_data,
    .x(x_rep), .precharge, .phase_en, .vread_sel, .ml(ml_replica)
  );

  ml_comparator #(.W(MLW)) u_cmp (
    .clk, .rst_n, .sense, .in_p(ml_work), .in_n(ml_replica), .out_p, .out_n
  );

  assign feasible = out_p;
  assign x_out    = x_reg;

  // Weights must not change while an evaluation is running.
  a_no_wr_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                 busy |-> !wr_en && !rx_load);
  a_cmp_rail:   assert property (@(posedge clk) disable iff (!rst_n)
                                 done |-> out_p != out_n);

endmodule
