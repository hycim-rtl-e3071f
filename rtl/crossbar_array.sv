// crossbar_array -- the FeFET CiM crossbar that holds the QUBO matrix Q, with its
// word-line driver, SL/DL switch and the per-subarray column multiplexers.
//
// Column A_i of Q is mapped onto subarray i: N rows by M bit columns, row j
// holding the M-bit element Q[j][i], one bit per 1FeFET1R cell. Word line WL_j
// (the gate of every cell in row j) carries x_j from the input buffer; every
// drain line of subarray i carries x_i from the SL/DL decoder. A cell conducts
// iff gate, stored bit and drain are all 1 (single-transistor multiplication
// x_j * q * x_i), so source line b of subarray i carries the count
// sum_j x_j Q[j][i][b] x_i. MUX_i routes the source line of bit bit_sel to
// ADC_i; here the multiplexer output is the vector of conducting cells on that
// line, and the ADC counts it.
//
// Interface: wr_* writes one M-bit element (row wr_row = j, subarray wr_col = i).
// erase clears every cell (the array is erased before it is programmed).
// act[i][j] is combinational from en, x_wl, x_dl, bit_sel and the cells.
// Array organisation follows the paper; the write port is this design's own.
module crossbar_array
  import hycim_pkg::*;
#(
  parameter int unsigned N = N_ITEMS_DEF,
  parameter int unsigned M = QBITS_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 erase,
  input  logic                 wr_en,
  input  logic [$clog2(N)-1:0] wr_row,
  input  logic [$clog2(N)-1:0] wr_col,
  input  logic [M-1:0]         wr_data,
  input  logic                 en,        // apply inputs to WL and DL
  input  logic [N-1:0]         x_wl,      // gates, from the input buffer
  input  logic [N-1:0]         x_dl,      // drains, from the SL/DL decoder
  input  logic [$clog2(M)-1:0] bit_sel,   // MUX select: bit column
  output logic [N-1:0]         act [N]    // act[i][j]: cell (j, bit_sel) of subarray i on
);

  // One register per element Q[j][i]: every cell is read in every computation.
  for (genvar i = 0; i < N; i++) begin : g_sub
    for (genvar j = 0; j < N; j++) begin : g_row
      logic [M-1:0] q;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)
          q <= '0;
        else if (erase)
          q <= '0;
        else if (wr_en && 32'(wr_row) == j && 32'(wr_col) == i)
          q <= wr_data;
      end
      assign act[i][j] = en && x_dl[i] && x_wl[j] && q[bit_sel];
    end
  end

  a_bitsel: assert property (@(posedge clk) disable iff (!rst_n)
                             en |-> 32'(bit_sel) < M);

endmodule
