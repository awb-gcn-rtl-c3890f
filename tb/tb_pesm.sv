// tb_pesm: 16 PEs finish one after another, 3 cycles apart, in an order where two
// consecutive finishers are never neighbours. Checks that the K under-loaded PEs are
// the first K finishers and the K over-loaded PEs the last K (newest first), that the
// recorded times are 3 cycles apart, that excluded PEs are skipped, that the
// watched PEs report the cycle they became idle, and that ready rises after
// completion.
`timescale 1ns/1ps
module tb_pesm;
  localparam int NPE = 16, K = 2, NW = 4, TW = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic round_start = 0, scan_en = 0, complete, ready;
  logic [NPE-1:0] done_in = '0, exclude = '0;
  logic [15:0] under_id [K], over_id [K], watch_id [NW];
  logic [TW-1:0] under_t [K], over_t [K], watch_t [NW];
  logic [K-1:0] tuple_v;
  pesm #(.NPE(NPE), .K(K), .NW(NW), .TW(TW)) dut (.*);
  assign complete = &done_in;
  int checks = 0, failures = 0;
  int order [NPE];
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  task automatic round(input bit excl);
    int e0;
    exclude = '0;
    if (excl) exclude[order[0]] = 1'b1;
    @(negedge clk); round_start = 1; done_in = '0;
    @(negedge clk); round_start = 0; scan_en = 1;
    for (int k = 0; k < NPE; k++) begin
      repeat (3) @(negedge clk);
      done_in[order[k]] = 1'b1;
    end
    while (!ready) @(negedge clk);
    e0 = excl ? 1 : 0;
    for (int k = 0; k < K; k++) begin
      chk(tuple_v[k], "tuple valid");
      chk(under_id[k] == 16'(order[e0 + k]), $sformatf("under %0d = %0d", k, under_id[k]));
      chk(over_id[k] == 16'(order[NPE - 1 - k]), $sformatf("over %0d = %0d", k, over_id[k]));
    end
    chk(under_t[1] - under_t[0] == 3, "under time spacing");
    chk(over_t[0] - over_t[1] == 3, "over time spacing");
    chk(over_t[0] - under_t[0] == TW'(3 * (NPE - 1 - e0)), "gap");
    chk(watch_t[1] - watch_t[0] == TW'(3 * 5), "watch times");
    scan_en = 0;
  endtask
  initial begin
    for (int k = 0; k < NPE / 2; k++) begin order[k] = 2 * k; order[NPE / 2 + k] = 2 * k + 1; end
    watch_id[0] = order[2]; watch_id[1] = order[7]; watch_id[2] = 0; watch_id[3] = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(!ready, "not ready after reset");
    round(0);
    round(1);
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
