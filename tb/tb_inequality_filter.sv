// tb_inequality_filter -- at the default 16 x 100 size:
//  1. the three-item example 4 x1 + 7 x2 + 2 x3 <= 9 over all 8 configurations
//     (six feasible, two infeasible, including the tie 9 <= 9);
//  2. random knapsack inequalities with item weights 0..64 and random
//     configurations, half of them placed near the capacity.
// The weights are split over the cells of a column greedily (4,4,...,rest);
// the replica holds C spread over the columns with x' = all ones. Every answer
// is compared with sum_i w_i x_i <= C computed here, and done must come exactly
// 7 cycles after start.
module tb_inequality_filter;
  import hycim_pkg::*;
  localparam int N = N_ITEMS_DEF, ROWS = FILTER_ROWS_DEF, LEVELS = CELL_LEVELS_DEF;
  localparam int MLW = $clog2(ROWS * LEVELS * N + 1);
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_replica = 0, rx_load = 0, start = 0;
  logic [$clog2(ROWS)-1:0] wr_row = 0;
  logic [$clog2(N)-1:0] wr_col = 0;
  logic [2:0] wr_data = 0;
  logic [N-1:0] rx_data = 0, x_in = 0, x_out;
  logic busy, done, feasible;
  logic [MLW-1:0] ml_work, ml_replica;
  int checks = 0, failures = 0, n_feas = 0, n_infeas = 0, n_tie = 0;
  int w [N];

  inequality_filter dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // write a column value v (0..ROWS*LEVELS) as cells 4,4,..,rest,0,..
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

  task automatic evaluate(input logic [N-1:0] x, input int cap);
    int s, k;
    s = 0;
    for (int i = 0; i < N; i++) if (x[i]) s += w[i];
    x_in = x; start = 1; @(negedge clk); start = 0; x_in = '0;
    k = 1;
    while (!done && k < 20) begin @(negedge clk); k++; end
    check(k == 7, $sformatf("done %0d cycles after start, want 7", k));
    check(feasible == (s <= cap), $sformatf("w.x=%0d C=%0d feasible=%0b", s, cap, feasible));
    check(x_out == x, "evaluated configuration forwarded");
    check(int'(ml_work) == ROWS * LEVELS * N - s, "working ML = VDD - w.x");
    check(int'(ml_replica) == ROWS * LEVELS * N - cap, "replica ML = VDD - C");
    if (s == cap) n_tie++;
    if (s <= cap) n_feas++; else n_infeas++;
    @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1. example inequality
    for (int i = 0; i < N; i++) w[i] = 0;
    w[0] = 4; w[1] = 7; w[2] = 2;
    load_arrays(9);
    for (int c = 0; c < 8; c++) evaluate(N'(c), 9);
    check(n_feas == 6 && n_infeas == 2, "example: six feasible, two infeasible");
    // 2. random inequalities
    for (int inst = 0; inst < 4; inst++) begin
      int cap, tot;
      tot = 0;
      for (int i = 0; i < N; i++) begin w[i] = $urandom_range(0, 64); tot += w[i]; end
      cap = $urandom_range(50, tot);
      load_arrays(cap);
      for (int t = 0; t < 20; t++) begin
        logic [N-1:0] x;
        int s;
        if (t < 10) begin
          x = {$urandom, $urandom, $urandom, $urandom};
        end else begin
          // add random items until the sum reaches about C
          x = '0; s = 0;
          for (int k = 0; k < 400 && s < cap - 2 + (t % 4); k++) begin
            int p;
            p = $urandom_range(0, N - 1);
            if (!x[p]) begin x[p] = 1'b1; s += w[p]; end
          end
        end
        evaluate(x, cap);
      end
    end
    check(n_tie > 0, "a tie (w.x = C) was evaluated");
    $display("feasible=%0d infeasible=%0d ties=%0d", n_feas, n_infeas, n_tie);
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
