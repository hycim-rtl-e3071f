// tb_crossbar_array -- programs random M-bit elements, applies random inputs and
// checks every multiplexed cell output against x_j * Q[j][i][b] * x_i computed
// here; also checks en = 0 (no inputs applied) and erase.
module tb_crossbar_array;
  localparam int N = 6, M = 3;
  logic clk = 0, rst_n = 0, erase = 0, wr_en = 0, en = 0;
  logic [$clog2(N)-1:0] wr_row = 0, wr_col = 0;
  logic [M-1:0] wr_data = 0;
  logic [N-1:0] x_wl = 0, x_dl = 0;
  logic [$clog2(M)-1:0] bit_sel = 0;
  logic [N-1:0] act [N];
  int checks = 0, failures = 0;
  int q [N][N];

  crossbar_array #(.N(N), .M(M)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic program_all();
    for (int j = 0; j < N; j++)
      for (int i = 0; i < N; i++) begin
        q[j][i] = $urandom_range(0, (1 << M) - 1);
        wr_en = 1; wr_row = j[$clog2(N)-1:0]; wr_col = i[$clog2(N)-1:0]; wr_data = M'(q[j][i]);
        @(negedge clk);
      end
    wr_en = 0;
  endtask

  task automatic check_all(input string tag);
    for (int b = 0; b < M; b++) begin
      bit_sel = b[$clog2(M)-1:0];
      #1;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          check(act[i][j] == (en && x_wl[j] && x_dl[i] && q[j][i][b]),
                $sformatf("%s: act[%0d][%0d] bit %0d", tag, i, j, b));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      if (t % 5 == 0) program_all();
      x_wl = N'($urandom); x_dl = (t % 2) ? x_wl : N'($urandom);
      en = (t != 3);
      check_all($sformatf("trial %0d", t));
      @(negedge clk);
    end
    erase = 1; @(negedge clk); erase = 0;
    for (int j = 0; j < N; j++) for (int i = 0; i < N; i++) q[j][i] = 0;
    x_wl = '1; x_dl = '1; en = 1;
    check_all("after erase");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
