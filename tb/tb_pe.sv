// tb_pe: one PE with a model of three ACC banks. Pushes random tasks aimed at a few
// slots, so back-to-back updates of one row are common, and checks that every row
// ends with the sum of its products (double-precision reference, truncation
// tolerance), which fails if a read-after-write hazard is missed. Checks that RaW
// stalls occurred, that a tag announced by a neighbour (peer_inflight) blocks issue of a
// task for that row until it is withdrawn, and that idle is high only when all
// work is done.
`timescale 1ns/1ps
module tb_pe;
  import awb_pkg::*;
  localparam int T = 4, HOPS = 1, TQ_DEPTH = 8, NB = 3, ROWS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, tq_full, tq_empty, rd_en, wb_valid, idle, stall;
  task_t push_data = '0;
  logic [$clog2(TQ_DEPTH+1)-1:0] tq_count;
  tag_t peer_inflight [4*HOPS][T], peer_pending [2*HOPS][T+1], my_inflight [T], my_pending [T+1];
  logic [15:0] rd_bank, rd_slot, wb_bank, wb_slot;
  fp32_t rd_data, wb_data;
  pe #(.T(T), .HOPS(HOPS), .TQ_DEPTH(TQ_DEPTH)) dut (.*);
  int checks = 0, failures = 0, stalls = 0;
  function automatic fp32_t to_fp32(input real r);
    logic [63:0] d;
    int e;
    d = $realtobits(r);
    if (r == 0.0) return '0;
    e = int'(d[62:52]) - 1023 + 127;
    return {d[63], e[7:0], d[51:29]};
  endfunction
  function automatic real to_real(input fp32_t f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction
  fp32_t mem [NB][ROWS];
  real   expv [NB][ROWS];
  assign rd_data = mem[rd_bank % NB][rd_slot % ROWS];
  always @(posedge clk) begin
    if (wb_valid && rst_n) mem[wb_bank % NB][wb_slot % ROWS] <= wb_data;
    if (stall && rst_n) stalls++;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  task automatic send(input int bk, input int sl);
    real a, b;
    a = to_real(to_fp32(real'($urandom % 2000) / 1000.0));
    b = to_real(to_fp32(real'($urandom % 2000) / 1000.0 - 1.0));
    while (tq_full) @(negedge clk);
    push = 1;
    push_data = '{pe: 16'(bk), slot: 16'(sl), a: to_fp32(a), b: to_fp32(b)};
    expv[bk][sl] += a * b;
    @(negedge clk);
    push = 0;
  endtask
  initial begin
    for (int j = 0; j < 4*HOPS; j++) for (int t = 0; t < T; t++) peer_inflight[j][t] = '0;
    for (int j = 0; j < 2*HOPS; j++) for (int t = 0; t <= T; t++) peer_pending[j][t] = '0;
    for (int b = 0; b < NB; b++) for (int s = 0; s < ROWS; s++) begin mem[b][s] = '0; expv[b][s] = 0.0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(idle, "idle after reset");
    for (int i = 0; i < 600; i++) begin
      send($urandom % NB, $urandom % 2);
      if (i % 50 == 0) chk(!idle, "busy while working");
    end
    repeat (40) @(negedge clk);
    chk(idle, "idle at end");
    for (int b = 0; b < NB; b++) for (int s = 0; s < ROWS; s++) begin
      real g, e, tol;
      g = to_real(mem[b][s]); e = expv[b][s];
      tol = 1e-4 * (e < 0 ? -e : e) + 1e-3;
      chk((g - e <= tol) && (e - g <= tol), $sformatf("bank %0d slot %0d got %f exp %f", b, s, g, e));
    end
    chk(stalls > 0, "no RaW stall seen");
    // a neighbour's in-flight tag for bank 1 slot 3 blocks that task
    peer_inflight[1][2] = '{v: 1'b1, bank: 16'd1, slot: 16'd3};
    send(1, 3);
    repeat (10) begin
      @(negedge clk);
      chk(!(rd_en && rd_bank == 1 && rd_slot == 3), "issued despite peer hazard");
    end
    chk(!idle, "held task keeps PE busy");
    peer_inflight[1][2] = '0;
    repeat (10) @(negedge clk);
    chk(idle, "released");
    chk(near(to_real(mem[1][3]), expv[1][3]), "released task result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic bit near(input real g, input real e);
    real tol;
    tol = 1e-4 * (e < 0 ? -e : e) + 1e-3;
    return (g - e <= tol) && (e - g <= tol);
  endfunction
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
