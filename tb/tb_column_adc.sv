// tb_column_adc -- the code must equal the number of activated cells (full
// resolution converter, N = 100) and clip at full scale for a 4-bit converter;
// the code is registered on sample and held otherwise.
module tb_column_adc;
  localparam int N = 100;
  logic clk = 0, rst_n = 0, sample = 0;
  logic [N-1:0] cells = 0;
  logic [6:0] code;
  logic [3:0] code4;
  int checks = 0, failures = 0;

  column_adc #(.N(N)) dut (.clk, .rst_n, .sample, .cells, .code);
  column_adc #(.N(N), .BITS(4)) dut4 (.clk, .rst_n, .sample, .cells, .code(code4));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int n_on, want4;
      n_on = (t < 101) ? t : $urandom_range(0, N);
      cells = '0;
      // activate n_on distinct cells
      for (int k = 0; k < n_on; k++) begin
        int p;
        p = $urandom_range(0, N - 1);
        while (cells[p]) p = (p + 1) % N;
        cells[p] = 1'b1;
      end
      sample = 1; @(negedge clk); sample = 0;
      want4 = (n_on > 15) ? 15 : n_on;
      check(int'(code) == n_on, $sformatf("count %0d got %0d", n_on, code));
      check(int'(code4) == want4, $sformatf("4-bit code for %0d got %0d", n_on, code4));
      cells = ~cells;
      @(negedge clk);
      check(int'(code) == n_on, "code holds without sample");
    end
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
