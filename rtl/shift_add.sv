// shift_add -- the Add / Shift / Sum stage of one crossbar subarray.
//
// The M bit columns of a subarray are converted one after another; the code of
// bit column b carries weight 2^b. This stage accumulates acc += code << b, so
// that after all M columns acc = x_i * sum_j x_j Q[j][i], the subarray's share of
// x^T Q x. Elements are unsigned: the crossbar stores profits p_ij = -q_ij >= 0
// and the sign is restored by the SA logic (this design's choice; the paper
// quantises only the magnitude, 7 bits for a largest element of 100).
//
// Timing: clr zeroes acc at the next edge; en adds code << shift at the next edge.
module shift_add #(
  parameter int unsigned CW = 7,
  parameter int unsigned M  = 7,
  parameter int unsigned AW = 14
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 en,
  input  logic [$clog2(M)-1:0] shift,
  input  logic [CW-1:0]        code,
  output logic [AW-1:0]        acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (clr) acc <= '0;
    else if (en)  acc <= acc + (AW'(code) << shift);
  end

endmodule
