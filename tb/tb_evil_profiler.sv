// tb_evil_profiler: sends random row slots (with one row made heavy) into the Super-PE
// non-zero counter and checks, every cycle, that max_count equals the largest count
// seen so far and that max_slot is a row with that count; clear restarts counting.
`timescale 1ns/1ps
module tb_evil_profiler;
  localparam int ROWS = 16, CW = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0;
  logic [15:0] in_slot = 0, max_slot;
  logic [CW-1:0] max_count;
  evil_profiler #(.ROWS(ROWS), .CW(CW)) dut (.*);
  int checks = 0, failures = 0;
  int cnt [ROWS];
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 4; run++) begin
      int heavy;
      heavy = $urandom % ROWS;
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int r = 0; r < ROWS; r++) cnt[r] = 0;
      for (int i = 0; i < 300; i++) begin
        int mx;
        in_valid = ($urandom % 4) != 0;
        in_slot  = (($urandom % 3) == 0) ? 16'(heavy) : 16'($urandom % ROWS);
        @(posedge clk);
        if (in_valid) cnt[in_slot]++;
        @(negedge clk);
        mx = 0;
        for (int r = 0; r < ROWS; r++) if (cnt[r] > mx) mx = cnt[r];
        checks++;
        if (int'(max_count) != mx || cnt[max_slot] != mx) begin
          failures++;
          if (failures < 10) $display("FAIL max %0d/%0d slot %0d", max_count, mx, max_slot);
        end
      end
      in_valid = 0;
      checks++;
      if (max_slot != 16'(heavy)) failures++;
    end
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
