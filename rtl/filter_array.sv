// filter_array -- ROWS x N array of multi-level 1FeFET1R filter cells sharing one
// match line (ML); used both as the working array and as the replica array of
// the inequality filter.
//
// Each cell (row r, column i) holds a weight w_ri in 0..LEVELS. Column i holds
// item weight w_i = sum_r w_ri; all cells of a column share the gate input x_i,
// and all cells discharge the same ML. In a phase that applies read voltage
// Vread_j, a cell conducts iff x_i = 1 and w_ri >= j, removing one unit of charge
// from ML. Over the four phases (j = 4,3,2,1) a cell therefore removes w_ri * x_i
// units and ML ends at ML_FULL - sum_i w_i x_i: "ML proportional to -w.x".
//
// This is a cycle-level digital equivalent of the analog array: ML is an integer
// count of charge units, ML_FULL (VDD) is the largest possible discharge, and
// one phase is one clock cycle. The linear discharge per conducting cell is the
// paper's design point (ML linear in k); the integer scale is this design's own.
//
// Interface: wr_* programs one cell (write pulses of the real array). precharge
// sets ML to ML_FULL; while phase_en is high, ML drops by the number of
// conducting cells for read voltage index vread_sel (1..4). ML is registered.
module filter_array
  import hycim_pkg::*;
#(
  parameter int unsigned N      = N_ITEMS_DEF,
  parameter int unsigned ROWS   = FILTER_ROWS_DEF,
  parameter int unsigned LEVELS = CELL_LEVELS_DEF,
  localparam int unsigned WB    = $clog2(LEVELS + 1),
  localparam int unsigned MLW   = $clog2(ROWS * LEVELS * N + 1),
  localparam int unsigned CW    = $clog2(ROWS * N + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // programming port
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic [$clog2(N)-1:0]    wr_col,
  input  logic [WB-1:0]           wr_data,
  // evaluation
  input  logic [N-1:0]            x,
  input  logic                    precharge,
  input  logic                    phase_en,
  input  logic [2:0]              vread_sel,
  output logic [MLW-1:0]          ml
);

  localparam logic [MLW-1:0] ML_FULL = MLW'(ROWS * LEVELS * N);

  logic [ROWS-1:0]            on_cell [N];  // cell (r, i) conducts in this phase
  logic [$clog2(ROWS+1)-1:0]  n_col [N];    // conducting cells of column i
  logic [CW-1:0]              n_on;         // conducting cells of the array

  // One register per cell: every cell is read in every phase.
  for (genvar i = 0; i < N; i++) begin : g_col
    for (genvar r = 0; r < ROWS; r++) begin : g_cell
      logic [WB-1:0] w;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)
          w <= '0;
        else if (wr_en && 32'(wr_row) == r && 32'(wr_col) == i)
          w <= wr_data;
      end
      assign on_cell[i][r] = x[i] && (vread_sel != 3'd0) && (32'(w) >= 32'(vread_sel));
    end
    always_comb begin
      n_col[i] = '0;
      for (int r = 0; r < ROWS; r++) n_col[i] = n_col[i] + ($clog2(ROWS+1))'(on_cell[i][r]);
    end
  end

  adder_tree #(.N(N), .IW($clog2(ROWS+1)), .OW(CW)) u_sum (.in(n_col), .sum(n_on));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          ml <= ML_FULL;
    else if (precharge)  ml <= ML_FULL;
    else if (phase_en)   ml <= ml - MLW'(n_on);
  end

  // A cell stores at most LEVELS distinct non-zero weights.
  a_wr_range: assert property (@(posedge clk) disable iff (!rst_n)
                               wr_en |-> 32'(wr_data) <= LEVELS);
  a_wr_addr:  assert property (@(posedge clk) disable iff (!rst_n)
                               wr_en |-> (32'(wr_row) < ROWS && 32'(wr_col) < N));

endmodule
