// tb_hycim_full -- one complete annealing run of the solver at its default size:
// 100 items, 16 x 100 filter arrays with cells of weight 0..4 (item weights up
// to 64), 100 x 700 crossbar with 7-bit elements, 1000 SA iterations.
// The instance is generated here in the style of the standard quadratic
// knapsack benchmarks: weights uniform in 1..50, profits uniform in 1..100 with
// 50 % density (symmetric), capacity uniform in [50, sum w].
// Every filter decision is compared with w.x <= C, every crossbar result with
// x^T P x, and the final E_o with -x_o^T P x_o; x_o must be feasible and the run
// must make each mechanism (infeasible filtering, feasible QUBO computation,
// downhill and uphill acceptance, uphill rejection) happen. The result is also
// compared with a greedy profit/weight solution computed here.
module tb_hycim_full;
  import hycim_pkg::*;
  localparam int N = N_ITEMS_DEF, ROWS = FILTER_ROWS_DEF, LEVELS = CELL_LEVELS_DEF;
  localparam int M = QBITS_DEF, IW = 16, TW = 24;
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
  int n_infeasible = 0, n_feasible = 0, n_better = 0, n_acc = 0, n_rej = 0;

  hycim_top dut (.*);

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
    for (int j = 0; j < N; j++) if (x[j]) for (int i = 0; i < N; i++) if (x[i]) s += p[j][i];
    return s;
  endfunction

  always @(negedge clk) if (rst_n) begin
    if (dut.u_filter.done) begin
      int s;
      s = wsum(dut.u_filter.x_out);
      check(dut.u_filter.feasible == (s <= cap), $sformatf("filter: w.x=%0d C=%0d", s, cap));
      if (s <= cap) n_feasible++;
    end
    if (dut.u_xbar.done)
      check(int'(dut.u_xbar.qubo) == qval(dut.u_xbar.x_buf), "crossbar: x^T P x");
    if (ev.infeasible)    n_infeasible++;
    if (ev.accept_better) n_better++;
    if (ev.accept_prob)   n_acc++;
    if (ev.reject_prob)   n_rej++;
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

  initial begin
    int tot, rest, k, greedy;
    logic [N-1:0] xg;
    tot = 0;
    for (int i = 0; i < N; i++) begin w[i] = $urandom_range(1, 50); tot += w[i]; end
    for (int j = 0; j < N; j++) for (int i = j; i < N; i++) begin
      p[j][i] = ($urandom_range(0, 1) == 1) ? $urandom_range(1, 100) : 0;
      p[i][j] = p[j][i];
    end
    cap = $urandom_range(50, tot);
    repeat (2) @(negedge clk);
    rst_n = 1;
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

    num_iters = 1000; t_init = TW'(8000 * 256); t_shift = 7; seed = 32'h5eed_0001; x_init = '0;
    sa_start = 1; @(negedge clk); sa_start = 0;
    k = 0;
    while (!sa_done && k < 100000) begin @(negedge clk); k++; end
    check(sa_done, "annealing finished");
    check(int'(iter) == 1000, "1000 iterations");
    check(wsum(x_o) <= cap, "final x_o feasible");
    check(int'(e_o) == -qval(x_o), "final E_o = -x_o^T P x_o");

    // greedy reference: add the item with the largest profit gain per weight
    xg = '0;
    forever begin
      int bi;
      real br;
      bi = -1; br = 0.0;
      for (int i = 0; i < N; i++)
        if (!xg[i] && wsum(xg) + w[i] <= cap) begin
          logic [N-1:0] xt;
          real r;
          xt = xg; xt[i] = 1'b1;
          r = real'(qval(xt) - qval(xg)) / real'(w[i]);
          if (bi < 0 || r > br) begin bi = i; br = r; end
        end
      if (bi < 0) break;
      xg[bi] = 1'b1;
    end
    greedy = qval(xg);
    $display("C=%0d sum w=%0d: SA profit %0d in %0d cycles, greedy profit %0d",
             cap, tot, -int'(e_o), k, greedy);
    $display("mechanisms: infeasible=%0d feasible=%0d better=%0d accept_p=%0d reject_p=%0d",
             n_infeasible, n_feasible, n_better, n_acc, n_rej);
    check(n_infeasible > 0, "infeasible configurations filtered");
    check(n_feasible > 0, "feasible configurations computed");
    check(n_better > 0, "downhill moves accepted");
    check(n_acc > 0, "uphill moves accepted with probability p");
    check(n_rej > 0, "uphill moves rejected");
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
