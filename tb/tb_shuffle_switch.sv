// tb_shuffle_switch: random rows through the Shuffle Switches with a random
// Distribution Switch Table and one evil row per group. Checks each lane's destination
// PE and slot (switched rows to the partner, evil rows to a Labor-PE of that group at
// the extra slot ROWS), that an evil row seen on the same lane over LABOR cycles
// reaches every Labor-PE, and the evil_hits count.
`timescale 1ns/1ps
module tb_shuffle_switch;
  import awb_pkg::*;
  localparam int NPE = 16, ROWS = 4, LANES = 8, LABOR = 4, NG = 2, RB = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [LANES-1:0] in_valid, in_take;
  logic [31:0] in_row [LANES];
  fp32_t in_a [LANES], in_b [LANES];
  task_t out_task [LANES];
  logic [15:0] partner [NPE], nsw [NPE];
  logic [NG-1:0] evil_valid;
  logic [31:0] evil_row [NG];
  logic [15:0] labor_id [NG][LABOR];
  logic [15:0] evil_hits;
  shuffle_switch #(.NPE(NPE), .ROWS(ROWS), .LANES(LANES), .LABOR(LABOR), .NG(NG)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    bit seen [LABOR];
    for (int p = 0; p < NPE; p++) begin partner[p] = p; nsw[p] = 0; end
    partner[2] = 9; partner[9] = 2; nsw[2] = 3; nsw[9] = 3;
    partner[5] = 6; partner[6] = 5; nsw[5] = 1; nsw[6] = 1;
    for (int g = 0; g < NG; g++) for (int l = 0; l < LABOR; l++) labor_id[g][l] = 16'(g * 8 + 1 + 2 * l);
    evil_valid = 2'b11; evil_row[0] = 13; evil_row[1] = 40;
    for (int l = 0; l < LANES; l++) begin in_row[l] = 0; in_a[l] = '0; in_b[l] = '0; end
    in_valid = '0; in_take = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      int hits;
      @(negedge clk);
      hits = 0;
      for (int l = 0; l < LANES; l++) begin
        in_row[l] = ($urandom % 5 == 0) ? evil_row[$urandom % NG] : $urandom % (NPE * ROWS);
        in_a[l] = $urandom; in_b[l] = $urandom;
        in_valid[l] = $urandom % 2; in_take[l] = in_valid[l] && ($urandom % 2);
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        int own, sl, g;
        own = in_row[l] >> RB; sl = in_row[l] % ROWS;
        g = -1;
        for (int k = 0; k < NG; k++) if (evil_row[k] == in_row[l]) g = k;
        chk(out_task[l].a == in_a[l] && out_task[l].b == in_b[l], "operands");
        if (g >= 0) begin
          bit ok;
          ok = 0;
          for (int k = 0; k < LABOR; k++) if (out_task[l].pe == labor_id[g][k]) ok = 1;
          chk(ok && out_task[l].slot == ROWS, $sformatf("evil lane %0d pe %0d", l, out_task[l].pe));
          if (in_valid[l] && in_take[l]) hits++;
        end else begin
          chk(out_task[l].slot == sl, "slot");
          chk(out_task[l].pe == ((sl < nsw[own]) ? partner[own] : own),
              $sformatf("row %0d pe %0d", in_row[l], out_task[l].pe));
        end
      end
      chk(int'(evil_hits) == hits, "evil_hits");
    end
    // same evil row on lane 0 for LABOR cycles: all Labor-PEs are used
    for (int k = 0; k < LABOR; k++) seen[k] = 0;
    for (int c = 0; c < LABOR; c++) begin
      @(negedge clk);
      in_row[0] = evil_row[1];
      #1;
      for (int k = 0; k < LABOR; k++) if (out_task[0].pe == labor_id[1][k]) seen[k] = 1;
    end
    for (int k = 0; k < LABOR; k++) chk(seen[k], "labor rotation");
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
