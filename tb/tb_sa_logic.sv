// tb_sa_logic -- drives the annealer with a model of the filter and crossbar
// written here (a random 8-item knapsack: infeasible answers after 8 cycles,
// QUBO values x^T P x after 21 cycles) and checks, for every iteration:
//  * x_new differs from x_o in exactly one bit;
//  * an infeasible answer leaves x_o / E_o unchanged (event "infeasible");
//  * E_new < E_o is always accepted; otherwise the move is accepted or
//    rejected, and x_o / E_o follow that decision;
//  * the temperature after k iterations is T_k = T_{k-1} - (T_{k-1} >> shift);
//  * the first E_o is -x^T P x of a feasible x_init, or 0 for an infeasible one;
//  * done after exactly num_iters iterations.
// Acceptance of uphill moves is checked statistically: at T = 0 none, at a very
// high T nearly all, and at intermediate T the count of accepted uphill moves
// must match sum(2^(-dE/T)) over the uphill moves within 4 sigma + 8 %.
module tb_sa_logic;
  import hycim_pkg::*;
  localparam int N = 8, PW = 21, IW = 16, TW = 24, EW = PW + 1;
  logic clk = 0, rst_n = 0, start = 0;
  logic [N-1:0] x_init = 0;
  logic [IW-1:0] num_iters = 0;
  logic [TW-1:0] t_init = 0;
  logic [4:0] t_shift = 0;
  logic [31:0] seed = 0;
  logic busy, done, flt_start, infeasible = 0, qubo_done = 0;
  logic [N-1:0] x_o, x_new;
  logic signed [EW-1:0] e_o;
  logic [IW-1:0] iter;
  logic [TW-1:0] temp;
  sa_event_t ev;
  logic [PW-1:0] qubo = 0;
  int checks = 0, failures = 0;
  int w [N], p [N][N], cap;
  int n_inf = 0, n_better = 0, n_acc = 0, n_rej = 0, n_eval = 0;
  real exp_acc = 0.0, var_acc = 0.0;

  sa_logic #(.N(N), .PW(PW), .IW(IW), .TW(TW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int wsum(input logic [N-1:0] x);
    int s;
    s = 0;
    for (int i = 0; i < N; i++) if (x[i]) s += w[i];
    return s;
  endfunction

  function automatic int qval(input logic [N-1:0] x);
    int s;
    s = 0;
    for (int j = 0; j < N; j++) for (int i = 0; i < N; i++) if (x[i] && x[j]) s += p[j][i];
    return s;
  endfunction

  // model of filter + enable circuit + crossbar, and per-iteration checks
  initial begin
    forever begin
      @(negedge clk);
      if (flt_start && rst_n) begin
        logic [N-1:0] xs, xo_before;
        int e_before, en;
        bit first;
        first = (iter == 0) && (x_new == x_init) && (n_eval == 0);
        xs = x_new; xo_before = x_o; e_before = int'(e_o);
        n_eval++;
        if (!first) check($countones(xs ^ xo_before) == 1, "x_new is x_o with one bit flipped");
        if (wsum(xs) > cap) begin
          repeat (7) @(negedge clk);
          infeasible = 1; @(negedge clk); infeasible = 0;
          if (first) begin
            #1;
            check(e_o == 0, "infeasible x_init gives E_o = 0");
          end else begin
            #1;
            check(ev.infeasible && !ev.accept_better && !ev.accept_prob && !ev.reject_prob,
                  "infeasible event");
            check(x_o == xo_before && int'(e_o) == e_before, "infeasible leaves x_o, E_o");
            n_inf++;
          end
        end else begin
          repeat (20) @(negedge clk);
          qubo = PW'(qval(xs)); qubo_done = 1; @(negedge clk); qubo_done = 0;
          en = -qval(xs);
          if (first) begin
            @(negedge clk);
            check(int'(e_o) == en, "feasible x_init gives E_o = -x^T P x");
          end else begin
            real pr;
            @(negedge clk);
            if (en < e_before) begin
              check(ev.accept_better, "downhill move accepted");
              n_better++;
            end else begin
              check(ev.accept_prob ^ ev.reject_prob, "uphill move decided");
              pr = (temp == 0) ? ((en == e_before) ? 1.0 : 0.0)
                   : $pow(2.0, -real'(en - e_before) * 256.0 / real'(temp));
              exp_acc += pr; var_acc += pr * (1.0 - pr);
              if (ev.accept_prob) n_acc++; else n_rej++;
            end
            if (ev.accept_better || ev.accept_prob)
              check(x_o == xs && int'(e_o) == en, "accepted move updates x_o, E_o");
            else
              check(x_o == xo_before && int'(e_o) == e_before, "rejected move keeps x_o, E_o");
          end
        end
      end
    end
  end

  task automatic run(input int iters, input int t0, input int sh, input logic [N-1:0] xi);
    int k, tk;
    x_init = xi; num_iters = IW'(iters); t_init = TW'(t0); t_shift = 5'(sh);
    seed = $urandom;
    n_eval = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    k = 0;
    while (!done && k < 100000) begin @(negedge clk); k++; end
    check(done, "run finished");
    check(int'(iter) == iters, "ran num_iters iterations");
    check(n_eval == iters + 1, $sformatf("%0d evaluations, want %0d", n_eval, iters + 1));
    tk = t0;
    for (int i = 0; i < iters; i++) tk = tk - (tk >> sh);
    check(int'(temp) == tk, $sformatf("final temperature %0d want %0d", temp, tk));
    check(wsum(x_o) <= cap || x_o == xi, "x_o feasible (or still x_init)");
    @(negedge clk);
    check(!busy, "idle after done");
  endtask

  initial begin
    for (int i = 0; i < N; i++) w[i] = $urandom_range(1, 20);
    for (int j = 0; j < N; j++) for (int i = j; i < N; i++) begin
      p[j][i] = $urandom_range(0, 100); p[i][j] = p[j][i];
    end
    cap = 40;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // T = 0: uphill moves (dE > 0) never accepted
    run(200, 0, 31, '0);
    // cooling run from an infeasible start
    run(300, 20000, 6, '1);
    // statistics at fixed temperatures
    n_acc = 0; n_rej = 0; exp_acc = 0.0; var_acc = 0.0;
    run(600, 60 * 256, 31, '0);
    run(600, 200 * 256, 31, '0);
    begin
      real dev;
      dev = real'(n_acc) - exp_acc;
      if (dev < 0) dev = -dev;
      $display("uphill: accepted %0d of %0d, expected %f", n_acc, n_acc + n_rej, exp_acc);
      check(n_acc + n_rej > 50, "enough uphill moves for statistics");
      check(dev <= 4.0 * $sqrt(var_acc) + 0.08 * exp_acc, "uphill acceptance follows 2^(-dE/T)");
    end
    // very high temperature: nearly every uphill move accepted
    n_acc = 0; n_rej = 0;
    run(200, 24'hFFFFFF, 31, '0);
    check(n_acc > 10 * (n_rej + 1), "high temperature accepts uphill moves");
    check(n_inf > 0 && n_better > 0, "infeasible and downhill iterations occurred");
    $display("infeasible=%0d better=%0d", n_inf, n_better);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
