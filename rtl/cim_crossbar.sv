// cim_crossbar -- FeFET computing-in-memory crossbar that evaluates the QUBO
// form x^T Q x for one feasible configuration x.
//
// x is captured in the input buffer and applied to the word lines (x^T) and,
// through the SL/DL decoder, to the drain lines (x). Each of the N subarrays
// (one per matrix column A_i) converts its M bit columns through MUX_i and
// ADC_i, and its shift-add stage builds x_i * sum_j x_j Q[j][i]. The N partial
// products are summed into the output buffer: qubo = sum_{i,j} x_j Q[j][i] x_i.
// Q holds unsigned M-bit elements (profits); the QUBO energy is -qubo.
//
// Interface: erase / wr_* program the array (element Q[wr_row][wr_col]).
// start (taken when idle) latches x; done pulses M+3 cycles later with qubo
// valid, and qubo holds until the next computation ends.
// Organisation follows the paper; widths, ADC resolution default (exact) and
// the cycle plan are this design's choices.
module cim_crossbar
  import hycim_pkg::*;
#(
  parameter int unsigned N        = N_ITEMS_DEF,
  parameter int unsigned M        = QBITS_DEF,
  parameter int unsigned ADC_BITS = $clog2(N + 1),
  localparam int unsigned AW      = $clog2(N * ((1 << M) - 1) + 1),
  localparam int unsigned PW      = $clog2(N * N * ((1 << M) - 1) + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 erase,
  input  logic                 wr_en,
  input  logic [$clog2(N)-1:0] wr_row,
  input  logic [$clog2(N)-1:0] wr_col,
  input  logic [M-1:0]         wr_data,
  input  logic                 start,
  input  logic [N-1:0]         x,
  output logic                 busy,
  output logic                 done,
  output logic [PW-1:0]        qubo
);

  logic [N-1:0]          x_buf;          // input buffer
  logic [N-1:0]          act [N];
  logic [ADC_BITS-1:0]   code [N];
  logic [AW-1:0]         acc [N];
  logic [PW-1:0]         total;
  logic                  array_en, adc_sample, acc_clr, acc_en, out_load;
  logic [$clog2(M)-1:0]  bit_sel, acc_shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               x_buf <= '0;
    else if (start && !busy)  x_buf <= x;
  end

  crossbar_ctrl #(.M(M)) u_ctrl (
    .clk, .rst_n, .start(start && !busy), .busy, .array_en, .bit_sel, .adc_sample,
    .acc_clr, .acc_en, .acc_shift, .out_load, .done
  );

  crossbar_array #(.N(N), .M(M)) u_array (
    .clk, .rst_n, .erase, .wr_en, .wr_row, .wr_col, .wr_data,
    .en(array_en), .x_wl(x_buf), .x_dl(x_buf), .bit_sel, .act
  );

  for (genvar i = 0; i < N; i++) begin : g_col
    column_adc #(.N(N), .BITS(ADC_BITS)) u_adc (
      .clk, .rst_n, .sample(adc_sample), .cells(act[i]), .code(code[i])
    );
    shift_add #(.CW(ADC_BITS), .M(M), .AW(AW)) u_sa (
      .clk, .rst_n, .clr(acc_clr), .en(acc_en), .shift(acc_shift),
      .code(code[i]), .acc(acc[i])
    );
  end

  adder_tree #(.N(N), .IW(AW), .OW(PW)) u_sum (.in(acc), .sum(total));

  always_ff @(posedge clk or negedge rst_n) begin   // output buffer
    if (!rst_n)        qubo <= '0;
    else if (out_load) qubo <= total;
  end

  a_no_wr_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                 busy |-> !wr_en && !erase);

endmodule
