// sa_logic -- simulated-annealing controller of the HyCiM solver.
//
// Each SA iteration generates a new configuration x_new and sends it to the
// inequality filter. If the filter finds it infeasible, the SA logic is told so
// (infeasible pulse) and goes straight to the next iteration: no QUBO value is
// computed. If it is feasible, the crossbar returns qubo = x^T P x and the energy
// is E_new = -qubo. E_new < E_o is accepted; otherwise it is accepted with
// probability p. An accepted move sets E_o = E_new and x_o = x_new. The
// temperature is updated once per iteration, feasible or not.
// That flow is the paper's. The following are this design's own choices, since
// the paper does not give them:
//  * x_new is x_o with one bit flipped; the bit index is floor(r * N / 2^16) of
//    16 bits r of a 32-bit xorshift generator seeded by the host.
//  * p = 2^(-dE / T). The test is dE * 2^16 <= T * L(u), with T an unsigned
//    Q16.8 temperature and L(u) = -log2(u / 2^16) (Q5.8, from hycim_pkg) for a
//    fresh 16-bit uniform u; P(L(u) >= dE/T) = 2^(-dE/T). dE = 0 is always accepted.
//  * Cooling is geometric: T <- T - (T >> t_shift) after every iteration.
//  * The starting configuration x_init is evaluated first; its E_o is -qubo if
//    feasible and 0 if not (the inequality-QUBO energy E is 0 for an infeasible x).
//
// Interface: start (in IDLE) loads x_init, seed, t_init and runs num_iters
// iterations, then pulses done for one cycle with x_o, e_o valid (they stay
// valid until the next start). flt_start is a one-cycle request with x_new
// stable until the answer (infeasible or qubo_done) arrives. ev carries one
// pulse per iteration outcome.
module sa_logic
  import hycim_pkg::*;
#(
  parameter int unsigned N  = N_ITEMS_DEF,
  parameter int unsigned PW = 21,   // width of the crossbar's qubo value
  parameter int unsigned IW = 16,   // iteration counter width
  parameter int unsigned TW = 24,   // temperature, unsigned Q(TW-8).8
  localparam int unsigned EW = PW + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host
  input  logic                 start,
  input  logic [N-1:0]         x_init,
  input  logic [IW-1:0]        num_iters,
  input  logic [TW-1:0]        t_init,
  input  logic [4:0]           t_shift,
  input  logic [31:0]          seed,
  output logic                 busy,
  output logic                 done,
  output logic [N-1:0]         x_o,
  output logic signed [EW-1:0] e_o,
  output logic [IW-1:0]        iter,
  output logic [TW-1:0]        temp,
  output sa_event_t            ev,
  // inequality filter / enable circuit / crossbar
  output logic                 flt_start,
  output logic [N-1:0]         x_new,
  input  logic                 infeasible,
  input  logic                 qubo_done,
  input  logic [PW-1:0]        qubo
);

  typedef enum logic [2:0] {
    SA_IDLE, SA_EVAL0, SA_WAIT0, SA_GEN, SA_ISSUE, SA_WAIT, SA_DECIDE, SA_UPDATE
  } sa_state_t;

  localparam int unsigned XW = 48;   // width of the acceptance comparison

  sa_state_t             state;
  logic [31:0]           rng;
  logic signed [EW-1:0]  e_new;
  logic [$clog2(N)-1:0]  idx;
  logic [EW-1:0]         de;
  logic [12:0]           lu;
  logic                  better, accept_p;

  always_comb begin
    idx      = $clog2(N)'((32'(rng[31:16]) * N) >> 16);
    de       = EW'(e_new - e_o);
    lu       = neg_log2_q8(rng[15:0]);
    better   = (e_new < e_o);
    accept_p = (XW'(de) << 16) <= (XW'(temp) * XW'(lu));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= SA_IDLE;
      rng       <= 32'h1;
      x_o       <= '0;
      x_new     <= '0;
      e_o       <= '0;
      e_new     <= '0;
      iter      <= '0;
      temp      <= '0;
      flt_start <= 1'b0;
      done      <= 1'b0;
      ev        <= '0;
    end else begin
      flt_start <= 1'b0;
      done      <= 1'b0;
      ev        <= '0;
      unique case (state)
        SA_IDLE: if (start) begin
          x_o   <= x_init;
          x_new <= x_init;
          rng   <= (seed == 32'd0) ? 32'h2545_f491 : seed;
          temp  <= t_init;
          iter  <= '0;
          state <= SA_EVAL0;
        end
        SA_EVAL0: begin
          flt_start <= 1'b1;
          state     <= SA_WAIT0;
        end
        SA_WAIT0: begin
          if (infeasible) begin
            e_o   <= '0;
            state <= SA_GEN;
          end else if (qubo_done) begin
            e_o   <= -$signed({1'b0, qubo});
            state <= SA_GEN;
          end
        end
        SA_GEN: begin
          if (iter == num_iters) begin
            done  <= 1'b1;
            state <= SA_IDLE;
          end else begin
            x_new <= x_o ^ (N'(1) << idx);
            rng   <= xorshift32(rng);
            state <= SA_ISSUE;
          end
        end
        SA_ISSUE: begin
          flt_start <= 1'b1;
          state     <= SA_WAIT;
        end
        SA_WAIT: begin
          if (infeasible) begin
            ev.infeasible <= 1'b1;
            state         <= SA_UPDATE;
          end else if (qubo_done) begin
            e_new <= -$signed({1'b0, qubo});
            state <= SA_DECIDE;
          end
        end
        SA_DECIDE: begin
          rng <= xorshift32(rng);
          if (better || accept_p) begin
            x_o <= x_new;
            e_o <= e_new;
          end
          ev.accept_better <= better;
          ev.accept_prob   <= !better && accept_p;
          ev.reject_prob   <= !better && !accept_p;
          state            <= SA_UPDATE;
        end
        SA_UPDATE: begin
          temp  <= temp - (temp >> t_shift);
          iter  <= iter + 1'b1;
          state <= SA_GEN;
        end
        default: state <= SA_IDLE;
      endcase
    end
  end

  assign busy = (state != SA_IDLE);

  a_one_answer: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(infeasible && qubo_done));
  a_e_nonpos:   assert property (@(posedge clk) disable iff (!rst_n)
                                 e_o <= 0);

endmodule
