// tb_wdc: 16 PEs in one Super-PE group (Super-PE 0, Labor-PEs 3, 7, 11, 15), ROWS = 4,
// K = 2 tuples, two tracked rounds. Round by round it checks the Distribution Switch
// Table against values worked out from Equations 2 and 3:
//   round 1: tuples (7,9) gap 40 -> G1 = 40, q = 8, N = 2; (12,3) gap 25 -> q = 5, N = 1;
//   round 2: tracked gaps -20 (q = 4, N -= 1) and 0 (unchanged);
//   round 3: second tracked update, gap 90 (q capped at 16, N += 4, clamped to ROWS);
//            both tuples are frozen after it;
//   round 4: no more updates; gap 200 vs 50 is beyond switching (200 >> BETA > 50): PE 5 is switched
//            whole onto the Super-PE for profiling;
//   round 5: the profiled evil slot 2 becomes evil row 5*4+2 = 22 on the Labor-PEs.
// It also checks the exclude mask and the event counters.
`timescale 1ns/1ps
module tb_wdc;
  localparam int NPE = 16, ROWS = 4, K = 2, TRACK = 2, GROUP = 16, LABOR = 4, TW = 24, G = 3, BETA = 1;
  localparam int NG = NPE / GROUP;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done;
  logic [15:0] under_id [K], over_id [K], watch_id [2*K*TRACK], prof_slot [NG];
  logic [TW-1:0] under_t [K], over_t [K], watch_t [2*K*TRACK];
  logic [K-1:0] tuple_v;
  logic [15:0] partner [NPE], nsw [NPE], super_id [NG], labor_id [NG][LABOR];
  logic [NPE-1:0] exclude;
  logic [NG-1:0] profiling, evil_valid;
  logic [31:0] evil_row [NG], n_switch, n_update, n_profile, n_remap;
  wdc #(.NPE(NPE), .ROWS(ROWS), .K(K), .TRACK(TRACK), .GROUP(GROUP), .LABOR(LABOR),
        .TW(TW), .G(G), .BETA(BETA)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  task automatic run_round();
    int n;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    n = 0;
    while (!done && n < 500) begin @(negedge clk); n++; end
    chk(done, "done");
    @(negedge clk);
  endtask
  // watch times for a tracked pair, looked up by id
  int wt [NPE];
  always_comb for (int i = 0; i < 2*K*TRACK; i++) watch_t[i] = TW'(wt[watch_id[i] % NPE]);
  initial begin
    for (int p = 0; p < NPE; p++) wt[p] = 0;
    prof_slot[0] = 2;
    tuple_v = '0;
    for (int k = 0; k < K; k++) begin under_id[k] = 0; over_id[k] = 0; under_t[k] = 0; over_t[k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(super_id[0] == 0, "super id");
    for (int l = 0; l < LABOR; l++) chk(labor_id[0][l] == 16'(3 + 4 * l), "labor id");
    chk(exclude == 16'h0001, "only the Super-PE excluded");
    // round 1
    tuple_v = 2'b11;
    over_id[0] = 7;  over_t[0] = 100; under_id[0] = 9; under_t[0] = 60;
    over_id[1] = 12; over_t[1] = 95;  under_id[1] = 3; under_t[1] = 70;
    run_round();
    chk(partner[7] == 9 && partner[9] == 7 && nsw[7] == 2 && nsw[9] == 2, $sformatf("tuple 0: %0d %0d", partner[7], nsw[7]));
    chk(partner[12] == 3 && partner[3] == 12 && nsw[12] == 1 && nsw[3] == 1, $sformatf("tuple 1: %0d %0d", partner[12], nsw[12]));
    chk(exclude == 16'h1289, "exclude");
    chk(n_switch == 2 && n_update == 0, "counters 1");
    // round 2: the tracked pairs report their new times
    tuple_v = '0;
    wt[7] = 60; wt[9] = 80; wt[12] = 70; wt[3] = 70;
    run_round();
    chk(nsw[7] == 1 && nsw[9] == 1, $sformatf("tuple 0 updated: %0d", nsw[7]));
    chk(nsw[12] == 1 && nsw[3] == 1, "tuple 1 unchanged");
    chk(n_update == 2, "counters 2");
    // round 3: second and last update
    wt[7] = 100; wt[9] = 10;
    run_round();
    chk(n_update == 4 && nsw[7] == 4 && nsw[12] == 1, $sformatf("second update: %0d", nsw[7]));
    // round 4: evil gap
    tuple_v = 2'b01;
    over_id[0] = 5; over_t[0] = 200; under_id[0] = 10; under_t[0] = 50;
    run_round();
    chk(profiling[0] && partner[5] == 0 && partner[0] == 5 && nsw[5] == ROWS && nsw[0] == ROWS, "profiling switch");
    chk(n_profile == 1, "profile count");
    chk(n_update == 4, "frozen after TRACK updates");
    // round 5: evil row found
    tuple_v = '0;
    run_round();
    chk(!profiling[0] && evil_valid[0] && evil_row[0] == 22, $sformatf("evil row %0d", evil_row[0]));
    chk(partner[5] == 5 && nsw[5] == 0 && partner[0] == 0 && nsw[0] == 0, "profiling switch undone");
    chk(n_remap == 1, "remap count");
    chk(partner[7] == 9 && nsw[7] == 4, "table kept");
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
