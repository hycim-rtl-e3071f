// tb_cim_crossbar -- at the default size (100 variables, 7-bit elements):
//  1. the 3 x 3 example matrix Q = [10 3 7; 3 6 2; 7 2 8] for all eight x,
//     after erasing the array (the other elements stay 0);
//  2. random matrices with elements 0..127 and random x of several densities,
//     including all-ones (largest value) and all-zeros.
// x^T Q x is computed here and compared with the output buffer; done must
// come M + 3 = 10 cycles after start.
module tb_cim_crossbar;
  import hycim_pkg::*;
  localparam int N = N_ITEMS_DEF, M = QBITS_DEF;
  localparam int PW = $clog2(N * N * ((1 << M) - 1) + 1);
  logic clk = 0, rst_n = 0, erase = 0, wr_en = 0, start = 0;
  logic [$clog2(N)-1:0] wr_row = 0, wr_col = 0;
  logic [M-1:0] wr_data = 0;
  logic [N-1:0] x = 0;
  logic busy, done;
  logic [PW-1:0] qubo;
  int checks = 0, failures = 0;
  int q [N][N];
  int ex [3][3] = '{'{10, 3, 7}, '{3, 6, 2}, '{7, 2, 8}};

  cim_crossbar dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_el(input int j, input int i, input int v);
    q[j][i] = v;
    wr_en = 1; wr_row = j[$clog2(N)-1:0]; wr_col = i[$clog2(N)-1:0]; wr_data = M'(v);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic compute(input logic [N-1:0] xv);
    longint want;
    int k;
    want = 0;
    for (int j = 0; j < N; j++)
      for (int i = 0; i < N; i++)
        if (xv[j] && xv[i]) want += q[j][i];
    x = xv; start = 1; @(negedge clk); start = 0; x = '0;
    k = 1;
    while (!done && k < 40) begin @(negedge clk); k++; end
    check(k == M + 3, $sformatf("done after %0d cycles, want %0d", k, M + 3));
    check(longint'(qubo) == want, $sformatf("qubo=%0d want %0d", qubo, want));
    @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1. example
    erase = 1; @(negedge clk); erase = 0;
    for (int j = 0; j < N; j++) for (int i = 0; i < N; i++) q[j][i] = 0;
    for (int j = 0; j < 3; j++) for (int i = 0; i < 3; i++) write_el(j, i, ex[j][i]);
    for (int c = 0; c < 8; c++) compute(N'(c));
    // 2. random matrices
    for (int inst = 0; inst < 2; inst++) begin
      for (int j = 0; j < N; j++)
        for (int i = 0; i < N; i++)
          write_el(j, i, (inst == 0) ? 127 : $urandom_range(0, 127));
      compute('1);
      compute('0);
      for (int t = 0; t < 10; t++) begin
        logic [N-1:0] xv;
        xv = {$urandom, $urandom, $urandom, $urandom};
        if (t % 3 == 1) xv = xv & {$urandom, $urandom, $urandom, $urandom};
        if (t % 3 == 2) xv = xv | {$urandom, $urandom, $urandom, $urandom};
        compute(xv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
