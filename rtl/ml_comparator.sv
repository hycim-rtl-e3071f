// ml_comparator -- two-stage latched comparator between the working-array ML
// (IN+) and the replica-array ML (IN-).
//
// Stage 1, the differential pre-amplifier, forms IN+ - IN-. Stage 2, the dynamic
// latch, resolves the sign of that difference on the sense clock and holds it:
// OUT+ = 1 when ML >= Replica ML, i.e. sum(w_i x_i) <= C, a feasible input;
// OUT- is its complement. Equal inputs resolve to feasible, as the paper's
// "ML >= Replica ML" rule prints. ML levels are the integer charge counts of
// filter_array, so this is a digital equivalent of the analog comparator.
//
// Timing: out_p/out_n change one clock edge after a cycle with sense = 1 and
// hold otherwise. Reset state is OUT+ = 0 (infeasible), this design's choice.
module ml_comparator #(
  parameter int unsigned W = 13
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sense,
  input  logic [W-1:0] in_p,
  input  logic [W-1:0] in_n,
  output logic         out_p,
  output logic         out_n
);

  logic signed [W:0] diff;   // stage 1: pre-amplified difference

  always_comb diff = $signed({1'b0, in_p}) - $signed({1'b0, in_n});

  always_ff @(posedge clk or negedge rst_n) begin   // stage 2: latch
    if (!rst_n) begin
      out_p <= 1'b0;
      out_n <= 1'b1;
    end else if (sense) begin
      out_p <= ~diff[W];
      out_n <=  diff[W];
    end
  end

endmodule
