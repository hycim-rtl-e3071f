// tb_ml_comparator -- random and equal ML pairs: after a sense clock OUT+ must
// be 1 exactly when ML >= Replica ML, OUT- its complement, and both must hold
// while sense is low.
module tb_ml_comparator;
  localparam int W = 13;
  logic clk = 0, rst_n = 0, sense = 0;
  logic [W-1:0] in_p = 0, in_n = 0;
  logic out_p, out_n;
  int checks = 0, failures = 0;

  ml_comparator #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      bit want;
      in_p = W'($urandom);
      case (t % 4)
        0: in_n = in_p;
        1: in_n = in_p + 1'b1;
        2: in_n = in_p - 1'b1;
        default: in_n = W'($urandom);
      endcase
      want = (in_p >= in_n);
      sense = 1; @(negedge clk); sense = 0;
      check(out_p == want && out_n == !want,
            $sformatf("in+=%0d in-=%0d out+=%0b", in_p, in_n, out_p));
      in_p = ~in_p; in_n = ~in_n;
      @(negedge clk);
      check(out_p == want, "output holds without sense");
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
