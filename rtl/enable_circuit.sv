// enable_circuit -- routes the inequality filter's decision: a feasible
// configuration is copied into the crossbar input buffer and the crossbar is
// started; an infeasible one is returned to the SA logic as a one-cycle
// "infeasible" signal so that the next SA iteration begins without a QUBO
// computation.
//
// The routing itself is the paper's (feasible -> crossbar, infeasible -> SA
// logic); how it is built is not described, and this is the simplest circuit
// that does it: one register stage. Timing: a flt_done pulse in cycle t gives
// xb_start or infeasible in cycle t+1, with xb_x valid from t+1 until the next
// feasible decision.
module enable_circuit #(
  parameter int unsigned N = 100
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flt_done,
  input  logic         flt_feasible,
  input  logic [N-1:0] flt_x,
  output logic         xb_start,
  output logic [N-1:0] xb_x,
  output logic         infeasible
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xb_start   <= 1'b0;
      infeasible <= 1'b0;
      xb_x       <= '0;
    end else begin
      xb_start   <= flt_done &&  flt_feasible;
      infeasible <= flt_done && !flt_feasible;
      if (flt_done && flt_feasible) xb_x <= flt_x;
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
                             !(xb_start && infeasible));

endmodule
