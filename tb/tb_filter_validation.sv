// tb_filter_validation -- the inequality-filter validation workload at the
// default 16 x 100 size: 40 knapsack inequalities of 100 items, and for each
// one 20 distinct configurations drawn by Monte Carlo sampling, 10 feasible and
// 10 infeasible, 800 cases in all.
// The inequalities are generated the way the standard quadratic knapsack
// benchmarks are: item weights uniform in 1..50, capacity uniform in
// [50, sum w]. A configuration is sampled by first drawing a fill density and
// then each bit with that probability; samples are kept until both classes
// have 10 members. Weights are split over a column's cells as 4,4,...,rest; the
// replica holds C spread over the columns with x' = all ones.
// Each case checks the decision against w.x <= C, the working ML against
// VDD - w.x and the replica ML against VDD - C, so the normalised working ML
// (ML / replica ML) lies at or above 1 exactly for the feasible cases. The
// closest normalised MLs on either side of 1 are printed.
module tb_filter_validation;
  import hycim_pkg::*;
  localparam int N = N_ITEMS_DEF, ROWS = FILTER_ROWS_DEF, LEVELS = CELL_LEVELS_DEF;
  localparam int MLW = $clog2(ROWS * LEVELS * N + 1);
  localparam int INSTANCES = 40, PER_CLASS = 10;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_replica = 0, rx_load = 0, start = 0;
  logic [$clog2(ROWS)-1:0] wr_row = 0;
  logic [$clog2(N)-1:0] wr_col = 0;
  logic [2:0] wr_data = 0;
  logic [N-1:0] rx_data = 0, x_in = 0, x_out;
  logic busy, done, feasible;
  logic [MLW-1:0] ml_work, ml_replica;
  int checks = 0, failures = 0, n_feas = 0, n_infeas = 0;
  real lo_feas = 1.0e9, hi_infeas = 0.0;
  int w [N];

  inequality_filter dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_column(input bit replica, input int col, input int v);
    for (int r = 0; r < ROWS; r++) begin
      int c;
      c = (v > LEVELS) ? LEVELS : v;
      v -= c;
      wr_en = 1; wr_replica = replica; wr_row = r[$clog2(ROWS)-1:0];
      wr_col = col[$clog2(N)-1:0]; wr_data = 3'(c);
      @(negedge clk);
    end
    wr_en = 0;
  endtask

  task automatic load_arrays(input int cap);
    int rest;
    for (int i = 0; i < N; i++) write_column(0, i, w[i]);
    rest = cap;
    for (int i = 0; i < N; i++) begin
      int v;
      v = (rest > ROWS * LEVELS) ? ROWS * LEVELS : rest;
      rest -= v;
      write_column(1, i, v);
    end
    rx_data = '1; rx_load = 1; @(negedge clk); rx_load = 0;
  endtask

  task automatic evaluate(input logic [N-1:0] x, input int s, input int cap);
    real norm;
    x_in = x; start = 1; @(negedge clk); start = 0; x_in = '0;
    while (!done) @(negedge clk);
    check(feasible == (s <= cap), $sformatf("w.x=%0d C=%0d feasible=%0b", s, cap, feasible));
    check(int'(ml_work) == ROWS * LEVELS * N - s, "working ML = VDD - w.x");
    check(int'(ml_replica) == ROWS * LEVELS * N - cap, "replica ML = VDD - C");
    norm = real'(ml_work) / real'(ml_replica);
    if (feasible) begin
      n_feas++;
      if (norm < lo_feas) lo_feas = norm;
    end else begin
      n_infeas++;
      if (norm > hi_infeas) hi_infeas = norm;
    end
    @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int inst = 0; inst < INSTANCES; inst++) begin
      int cap, tot, nf, ni, tries;
      logic [N-1:0] seen [$];
      tot = 0;
      for (int i = 0; i < N; i++) begin w[i] = $urandom_range(1, 50); tot += w[i]; end
      cap = $urandom_range(50, tot);
      load_arrays(cap);
      nf = 0; ni = 0; tries = 0;
      while ((nf < PER_CLASS || ni < PER_CLASS) && tries < 100000) begin
        logic [N-1:0] x;
        int s, d;
        bit dup;
        tries++;
        d = $urandom_range(1, 100);
        s = 0;
        for (int i = 0; i < N; i++) begin
          x[i] = ($urandom_range(1, 100) <= d);
          if (x[i]) s += w[i];
        end
        dup = 0;
        foreach (seen[k]) if (seen[k] == x) dup = 1;
        if (!dup && ((s <= cap && nf < PER_CLASS) || (s > cap && ni < PER_CLASS))) begin
          seen.push_back(x);
          if (s <= cap) nf++; else ni++;
          evaluate(x, s, cap);
        end
      end
      check(nf == PER_CLASS && ni == PER_CLASS, $sformatf("instance %0d: 10 + 10 samples", inst));
    end
    check(n_feas == INSTANCES * PER_CLASS && n_infeas == INSTANCES * PER_CLASS,
          "400 feasible and 400 infeasible decisions");
    $display("%0d cases: feasible=%0d infeasible=%0d", n_feas + n_infeas, n_feas, n_infeas);
    $display("normalised ML: lowest feasible %f, highest infeasible %f", lo_feas, hi_infeas);
    check(lo_feas >= 1.0 && hi_infeas < 1.0, "classes on either side of the replica ML");
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
