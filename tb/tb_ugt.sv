// tb_ugt: loads G1 from a first gap, then feeds random execution-time pairs and checks
// the signed row count against N = min(ROWS, (q * ROWS/2) >> G) with q = gap div
// (G1 >> G), capped at 2^(G+1); checks the evil flag ((over >> BETA) > under) and
// that the lookup takes q + 2 cycles from start to done.
`timescale 1ns/1ps
module tb_ugt;
  localparam int TW = 24, ROWS = 16, G = 3, BETA = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load_g1 = 0, start = 0, busy, done, evil;
  logic [TW-1:0] over_t = 0, under_t = 0, g1;
  logic signed [16:0] delta_rows;
  ugt #(.TW(TW), .ROWS(ROWS), .G(G), .BETA(BETA)) dut (.*);
  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic run(input int o, input int u, input bit ld);
    int g1v, thr, gap, q, n, cyc;
    @(negedge clk);
    over_t = o; under_t = u; start = 1; load_g1 = ld;
    @(negedge clk);
    start = 0; load_g1 = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    g1v = int'(g1);
    thr = (g1v >> G) == 0 ? 1 : g1v >> G;
    gap = o > u ? o - u : u - o;
    q   = gap / thr;
    if (q > 2**(G+1)) q = 2**(G+1);
    n   = (q * (ROWS / 2)) >> G;
    if (n > ROWS) n = ROWS;
    if (o < u) n = -n;
    chk(int'(delta_rows) == n, $sformatf("rows %0d expected %0d (o=%0d u=%0d)", delta_rows, n, o, u));
    chk(evil == ((o >> BETA) > u), "evil");
    chk(cyc == q + 2, $sformatf("latency %0d expected %0d", cyc, q + 2));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1000, 200, 1);
    chk(g1 == 800, "g1");
    for (int i = 0; i < 300; i++) begin
      int o, u;
      u = 100 + $urandom % 800;
      o = u + int'($urandom % 1200) - 300;
      if (o < 0) o = 0;
      run(o, u, 0);
    end
    run(5000, 100, 0);   // saturates
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
