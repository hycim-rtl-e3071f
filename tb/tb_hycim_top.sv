// tb_hycim_top -- end-to-end runs of the solver at a reduced size (16 items,
// 16-row filter arrays, 7-bit elements).
//  1. The 3-variable example with Q = [10 3 7; 3 6 2; 7 2 8] (profits) and the
//     constraint x1 + x2 + x3 <= 2; the other 13 items weigh 16 > C, so every
//     configuration containing them is infeasible. The optimum is x = {1,0,1},
//     E = -32; the run must end there.
//  2. A random 16-item quadratic knapsack (weights 1..50, profits 0..100, C in
//     [50, sum w]); its optimum is found here by exhaustive search and the final
//     E_o must reach at least 90 % of it.
// Throughout, every filter decision is compared with w.x <= C, every crossbar
// result with x^T P x, and E_o with -x_o^T P x_o. Each mechanism must occur at
// least once: infeasible filtering, feasible forwarding to the crossbar, a tie
// (w.x = C, feasible), downhill acceptance, uphill acceptance with probability
// p, uphill rejection and cooling.
module tb_hycim_top;
  import hycim_pkg::*;
  localparam int N = 16, ROWS = 16, LEVELS = 4, M = 7, IW = 16, TW = 24;
  localparam int PW = $clog2(N * N * ((1 << M) - 1) + 1), EW = PW + 1;
  localparam int MLW = $clog2(ROWS * LEVELS * N + 1);
  logic clk = 0, rst_n = 0;
  logic xb_erase = 0, xb_wr_en = 0;
  logic [$clog2(N)-1:0] xb_wr_row = 0, xb_wr_col = 0;
  logic [M-1:0] xb_wr_data = 0;
  logic flt_wr_en = 0, flt_wr_replica = 0, rx_load = 0;
  logic [$clog2(ROWS)-1:0] flt_wr_row = 0;
  logic [$clog2(N)-1:0] flt_wr_col = 0;
  logic [2:0] flt_wr_data = 0;
  logic [N-1:0] rx_data = 0, x_init = 0, x_o;
  logic sa_start = 0, sa_busy, sa_done;
  logic [IW-1:0] num_iters = 0, iter;
  logic [TW-1:0] t_init = 0, temp;
  logic [4:0] t_shift = 0;
  logic [31:0] seed = 0;
  logic signed [EW-1:0] e_o;
  sa_event_t ev;
  logic [MLW-1:0] ml_work, ml_replica;
  int checks = 0, failures = 0;
  int w [N], p [N][N], cap;
  int n_infeasible = 0, n_feasible = 0, n_tie = 0, n_better = 0, n_acc = 0, n_rej = 0;
  int n_cool = 0;
  logic [TW-1:0] prev_temp = 0;

  hycim_top #(.N(N), .ROWS(ROWS), .LEVELS(LEVELS), .M(M)) dut (.*);

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

  // checks on every filter decision, crossbar result and SA event
  always @(negedge clk) if (rst_n) begin
    if (dut.u_filter.done) begin
      int s;
      s = wsum(dut.u_filter.x_out);
      check(dut.u_filter.feasible == (s <= cap), $sformatf("filter: w.x=%0d C=%0d", s, cap));
      if (s == cap) n_tie++;
      if (s <= cap) n_feasible++;
    end
    if (dut.u_xbar.done)
      check(int'(dut.u_xbar.qubo) == qval(dut.u_xbar.x_buf), "crossbar: x^T P x");
    if (ev.infeasible)    n_infeasible++;
    if (ev.accept_better) n_better++;
    if (ev.accept_prob)   n_acc++;
    if (ev.reject_prob)   n_rej++;
    if (sa_busy && temp < prev_temp) n_cool++;
    prev_temp = temp;
  end

  task automatic write_filter_column(input bit replica, input int col, input int v);
    for (int r = 0; r < ROWS; r++) begin
      int c;
      c = (v > LEVELS) ? LEVELS : v;
      v -= c;
      flt_wr_en = 1; flt_wr_replica = replica; flt_wr_row = r[$clog2(ROWS)-1:0];
      flt_wr_col = col[$clog2(N)-1:0]; flt_wr_data = 3'(c);
      @(negedge clk);
    end
    flt_wr_en = 0;
  endtask

  task automatic load_problem();
    int rest;
    xb_erase = 1; @(negedge clk); xb_erase = 0;
    for (int j = 0; j < N; j++)
      for (int i = 0; i < N; i++) begin
        xb_wr_en = 1; xb_wr_row = j[$clog2(N)-1:0]; xb_wr_col = i[$clog2(N)-1:0];
        xb_wr_data = M'(p[j][i]);
        @(negedge clk);
      end
    xb_wr_en = 0;
    for (int i = 0; i < N; i++) write_filter_column(0, i, w[i]);
    rest = cap;
    for (int i = 0; i < N; i++) begin
      int v;
      v = (rest > ROWS * LEVELS) ? ROWS * LEVELS : rest;
      rest -= v;
      write_filter_column(1, i, v);
    end
    rx_data = '1; rx_load = 1; @(negedge clk); rx_load = 0;
  endtask

  task automatic anneal(input int iters, input int t0, input int sh, input int sd);
    int k;
    num_iters = IW'(iters); t_init = TW'(t0); t_shift = 5'(sh); seed = sd; x_init = '0;
    sa_start = 1; @(negedge clk); sa_start = 0;
    k = 0;
    while (!sa_done && k < 200000) begin @(negedge clk); k++; end
    check(sa_done, "annealing finished");
    check(int'(iter) == iters, "iteration count");
    check(wsum(x_o) <= cap, "final x_o feasible");
    check(int'(e_o) == -qval(x_o), "final E_o = -x_o^T P x_o");
    $display("run: %0d iterations in %0d cycles, E_o=%0d, x_o=%h", iters, k, e_o, x_o);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1. example
    for (int j = 0; j < N; j++) for (int i = 0; i < N; i++) p[j][i] = 0;
    p[0][0] = 10; p[0][1] = 3; p[0][2] = 7;
    p[1][0] = 3;  p[1][1] = 6; p[1][2] = 2;
    p[2][0] = 7;  p[2][1] = 2; p[2][2] = 8;
    for (int i = 0; i < N; i++) w[i] = (i < 3) ? 1 : 16;
    cap = 2;
    load_problem();
    anneal(300, 20 * 256, 5, 32'h1234_5678);
    check(int'(e_o) == -32 && x_o == N'(3'b101), "example solved: x = {1,0,1}, E = -32");
    // 2. random quadratic knapsack
    begin
      int tot, best;
      tot = 0;
      for (int i = 0; i < N; i++) begin w[i] = $urandom_range(1, 50); tot += w[i]; end
      for (int j = 0; j < N; j++) for (int i = j; i < N; i++) begin
        p[j][i] = $urandom_range(0, 100); p[i][j] = p[j][i];
      end
      cap = $urandom_range(50, tot);
      if (cap > ROWS * LEVELS * N) cap = ROWS * LEVELS * N;
      best = 0;
      for (int c = 0; c < (1 << N); c++)
        if (wsum(N'(c)) <= cap && qval(N'(c)) > best) best = qval(N'(c));
      load_problem();
      anneal(1000, 300 * 256, 8, 32'h0bad_cafe);
      $display("random QKP: C=%0d optimum %0d, found %0d", cap, best, -int'(e_o));
      check(-int'(e_o) * 10 >= best * 9, "random QKP: within 10 % of the optimum");
    end
    $display("mechanisms: infeasible=%0d feasible=%0d tie=%0d better=%0d accept_p=%0d reject_p=%0d cool=%0d",
             n_infeasible, n_feasible, n_tie, n_better, n_acc, n_rej, n_cool);
    check(n_infeasible > 0, "infeasible configurations filtered");
    check(n_feasible > 0, "feasible configurations forwarded to the crossbar");
    check(n_tie > 0, "tie w.x = C evaluated");
    check(n_better > 0, "downhill moves accepted");
    check(n_acc > 0, "uphill moves accepted with probability p");
    check(n_rej > 0, "uphill moves rejected");
    check(n_cool > 0, "temperature lowered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
