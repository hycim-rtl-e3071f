// tb_filter_array -- programs random multi-level weights into a small array,
// drives random inputs through precharge and the four staircase phases, and
// checks the ML level after each phase against a count made here: a cell with
// weight k and x = 1 conducts in phase j (Vread_j) iff k >= j, so after all
// phases ML = ML_FULL - sum_i x_i * sum_r w_ri.
module tb_filter_array;
  localparam int N = 7, ROWS = 3, LEVELS = 4;
  localparam int MLW = $clog2(ROWS * LEVELS * N + 1);
  localparam int FULL = ROWS * LEVELS * N;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [$clog2(ROWS)-1:0] wr_row = 0;
  logic [$clog2(N)-1:0] wr_col = 0;
  logic [2:0] wr_data = 0;
  logic [N-1:0] x = 0;
  logic precharge = 0, phase_en = 0;
  logic [2:0] vread_sel = 0;
  logic [MLW-1:0] ml;
  int checks = 0, failures = 0;
  int w [ROWS][N];

  filter_array #(.N(N), .ROWS(ROWS), .LEVELS(LEVELS)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      // reprogram every few trials
      if (t % 5 == 0) begin
        for (int r = 0; r < ROWS; r++)
          for (int i = 0; i < N; i++) begin
            w[r][i] = (t == 0) ? LEVELS : $urandom_range(0, LEVELS);
            wr_en = 1; wr_row = r[$clog2(ROWS)-1:0]; wr_col = i[$clog2(N)-1:0];
            wr_data = 3'(w[r][i]);
            @(negedge clk);
          end
        wr_en = 0;
      end
      x = N'($urandom);
      if (t == 0) x = '1;
      precharge = 1; @(negedge clk); precharge = 0;
      check(int'(ml) == FULL, "precharged ML equals VDD level");
      begin
        int exp_ml;
        exp_ml = FULL;
        for (int j = LEVELS; j >= 1; j--) begin
          int on;
          on = 0;
          for (int i = 0; i < N; i++)
            for (int r = 0; r < ROWS; r++)
              if (x[i] && w[r][i] >= j) on++;
          exp_ml -= on;
          phase_en = 1; vread_sel = 3'(j);
          @(negedge clk);
          check(int'(ml) == exp_ml, $sformatf("trial %0d Vread%0d: ML=%0d want %0d", t, j, ml, exp_ml));
        end
        phase_en = 0; vread_sel = 0;
        begin
          int s;
          s = 0;
          for (int i = 0; i < N; i++)
            for (int r = 0; r < ROWS; r++) s += x[i] ? w[r][i] : 0;
          check(int'(ml) == FULL - s, "final ML = VDD - w.x");
        end
        @(negedge clk);
        check(int'(ml) == exp_ml, "ML holds outside phases");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
