// column_adc -- the ADC behind one crossbar column multiplexer.
//
// The multiplexed source-line current is proportional to the number of
// conducting cells on the line (the chip measurements show this current linear
// in the activated-cell count). The converter outputs that count as a BITS-bit
// code, clipped at full scale when BITS is too small to hold N. The default BITS
// resolves every count 0..N exactly; the paper does not give the ADC resolution.
//
// Timing: the code for the cells present in a cycle with sample = 1 appears
// after the next clock edge and is held until the next sample.
module column_adc #(
  parameter int unsigned N    = 100,
  parameter int unsigned BITS = $clog2(N + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sample,
  input  logic [N-1:0]    cells,
  output logic [BITS-1:0] code
);

  localparam int unsigned SW = $clog2(N + 1);
  localparam logic [SW:0] FULL = (SW + 1)'((1 << BITS) - 1);

  logic [SW:0] cnt;
  logic [0:0]  cell_in [N];

  for (genvar j = 0; j < N; j++) begin : g_cell
    assign cell_in[j] = cells[j];
  end

  adder_tree #(.N(N), .IW(1), .OW(SW + 1)) u_count (.in(cell_in), .sum(cnt));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      code <= '0;
    else if (sample) code <= (cnt > FULL) ? BITS'(FULL) : BITS'(cnt);
  end

endmodule
