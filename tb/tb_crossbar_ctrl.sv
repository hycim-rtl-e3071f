// tb_crossbar_ctrl -- checks the bit-serial sequence for M = 7: one clear on
// start, conversion of bit columns 0..6 in consecutive cycles, accumulation of
// bit b one cycle after its conversion with shift b, output-buffer load, and
// done M + 3 cycles after start.
module tb_crossbar_ctrl;
  localparam int M = 7;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, array_en, adc_sample, acc_clr, acc_en, out_load, done;
  logic [$clog2(M)-1:0] bit_sel, acc_shift;
  int checks = 0, failures = 0;

  crossbar_ctrl #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      int conv_seen, acc_seen, k;
      conv_seen = 0; acc_seen = 0;
      start = 1; #1;
      check(acc_clr, "clear on start");
      @(negedge clk); start = (rep == 2);   // held start must not restart mid-run
      k = 1;
      while (!done && k < 40) begin
        if (adc_sample) begin
          check(array_en, "inputs applied while converting");
          check(int'(bit_sel) == conv_seen, $sformatf("bit_sel %0d want %0d", bit_sel, conv_seen));
          check(k == conv_seen + 1, "conversions back to back from cycle 1");
          conv_seen++;
        end
        if (acc_en) begin
          check(int'(acc_shift) == acc_seen, "shift of accumulated column");
          check(k == acc_seen + 2, "accumulate one cycle after conversion");
          acc_seen++;
        end
        check(!acc_clr, "no clear during run");
        if (out_load) check(k == M + 2, "output load after last accumulation");
        check(busy, "busy during run");
        @(negedge clk); k++;
      end
      start = 0;
      check(conv_seen == M && acc_seen == M, "all bit columns converted and accumulated");
      check(k == M + 3, $sformatf("done at cycle %0d want %0d", k, M + 3));
      @(negedge clk);
      if (rep != 2) check(!busy, "idle after done");
      repeat (M + 5) @(negedge clk);
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
