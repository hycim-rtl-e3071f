// tb_enable_circuit -- feasible decisions must start the crossbar with the
// evaluated configuration one cycle later; infeasible ones must raise the
// infeasible return to the SA logic and leave the crossbar input unchanged.
module tb_enable_circuit;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic flt_done = 0, flt_feasible = 0;
  logic [N-1:0] flt_x = 0;
  logic xb_start, infeasible;
  logic [N-1:0] xb_x;
  logic [N-1:0] last_feasible = 0;
  int checks = 0, failures = 0;

  enable_circuit #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!xb_start && !infeasible, "quiet after reset");
    for (int t = 0; t < 200; t++) begin
      bit d, f;
      d = ($urandom_range(0, 3) != 0);
      f = 1'($urandom_range(0, 1));
      flt_done = d; flt_feasible = f; flt_x = N'($urandom);
      if (d && f) last_feasible = flt_x;
      @(negedge clk);
      flt_done = 0; flt_x = N'($urandom);
      check(xb_start == (d && f), "xb_start follows feasible decision");
      check(infeasible == (d && !f), "infeasible follows infeasible decision");
      check(xb_x == last_feasible, "crossbar input buffer holds last feasible x");
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
