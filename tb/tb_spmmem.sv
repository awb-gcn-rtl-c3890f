// tb_spmmem: loads a list of non-zeros, streams it twice with random lane readiness,
// and checks that every non-zero is delivered exactly once per stream with its
// contents intact, that busy and done behave, and that with all lanes ready a stream
// of n non-zeros takes ceil(n / LANES) cycles.
`timescale 1ns/1ps
module tb_spmmem;
  import awb_pkg::*;
  localparam int NNZ_MAX = 64, LANES = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, start = 0, busy, done;
  logic [31:0] wr_addr = 0, nnz = 0;
  nz_t wr_data = '0;
  logic [LANES-1:0] lane_valid, lane_ready = '0;
  nz_t lane_nz [LANES];
  spmmem #(.NNZ_MAX(NNZ_MAX), .LANES(LANES)) dut (.*);
  int checks = 0, failures = 0;
  nz_t m [NNZ_MAX];
  int got [NNZ_MAX];
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  task automatic stream(input bit all_ready, input int n);
    int cyc;
    for (int i = 0; i < n; i++) got[i] = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 1000) begin
      lane_ready = all_ready ? '1 : LANES'($urandom);
      #1;
      for (int l = 0; l < LANES; l++)
        if (lane_valid[l] && lane_ready[l]) begin
          int idx;
          idx = -1;
          for (int i = 0; i < n; i++) if (m[i] == lane_nz[l]) idx = i;
          chk(idx >= 0, "unknown non-zero");
          if (idx >= 0) got[idx]++;
        end
      if (lane_valid != '0) cyc++;
      @(negedge clk);
    end
    for (int i = 0; i < n; i++) chk(got[i] == 1, $sformatf("nz %0d delivered %0d times", i, got[i]));
    if (all_ready) chk(cyc == (n + LANES - 1) / LANES, $sformatf("stream took %0d cycles", cyc));
    lane_ready = '0;
  endtask
  initial begin
    int n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    n = 37;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      m[i] = '{row: i * 3, col: i / 4, val: $urandom};
      wr_en = 1; wr_addr = i; wr_data = m[i];
    end
    @(negedge clk);
    wr_en = 0; nnz = n;
    stream(0, n);
    stream(1, n);
    stream(0, n);
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
