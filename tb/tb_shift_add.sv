// tb_shift_add -- feeds M random codes with shifts 0..M-1 and checks the
// accumulated value sum_b code_b * 2^b, plus clear and hold.
module tb_shift_add;
  localparam int CW = 7, M = 7, AW = 14;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [$clog2(M)-1:0] shift = 0;
  logic [CW-1:0] code = 0;
  logic [AW-1:0] acc;
  int checks = 0, failures = 0;

  shift_add #(.CW(CW), .M(M), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      int want;
      clr = 1; @(negedge clk); clr = 0;
      check(acc == 0, "clear");
      want = 0;
      for (int b = 0; b < M; b++) begin
        int c;
        c = (t == 0) ? 100 : $urandom_range(0, 100);
        want += c << b;
        en = 1; shift = b[$clog2(M)-1:0]; code = CW'(c);
        @(negedge clk);
        check(int'(acc) == want, $sformatf("trial %0d bit %0d acc=%0d want %0d", t, b, acc, want));
      end
      en = 0; code = 7'd55;
      @(negedge clk);
      check(int'(acc) == want, "hold");
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
