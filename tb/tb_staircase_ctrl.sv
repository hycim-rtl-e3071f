// tb_staircase_ctrl -- checks the filter-iteration sequence: precharge, four
// phases applying read voltages 4,3,2,1 (lowest to highest), sense, result;
// the 7-cycle latency from start to done; and that start is ignored while busy.
module tb_staircase_ctrl;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, precharge, phase_en, sense, done;
  logic [2:0] vread_sel;
  int checks = 0, failures = 0;

  staircase_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected outputs k cycles after the start cycle
  task automatic expect_step(input int k);
    bit ep, es, ed, eb, eph;
    int ev;
    ep = (k == 1); es = (k == 6); ed = (k == 7); eb = (k >= 1 && k <= 7);
    eph = (k >= 2 && k <= 5);
    ev = eph ? 6 - k : 0;   // k=2 -> Vread4 ... k=5 -> Vread1
    check(precharge == ep, $sformatf("precharge at step %0d", k));
    check(phase_en == eph, $sformatf("phase_en at step %0d", k));
    check(int'(vread_sel) == ev, $sformatf("vread_sel=%0d at step %0d, want %0d", vread_sel, k, ev));
    check(sense == es, $sformatf("sense at step %0d", k));
    check(done == ed, $sformatf("done at step %0d", k));
    check(busy == eb, $sformatf("busy at step %0d", k));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy && !precharge && !phase_en && !sense && !done, "idle after reset");
    for (int rep = 0; rep < 3; rep++) begin
      start = 1;
      @(negedge clk);
      start = (rep == 1);   // in run 1, keep start high: must not restart early
      for (int k = 1; k <= 7; k++) begin
        expect_step(k);
        @(negedge clk);
      end
      start = 0;
      if (rep == 1) begin
        // start was high in the RESULT cycle? no: taken only in IDLE -> idle now
        check(!busy || precharge, "restart only from idle");
        @(negedge clk);
      end
      repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
