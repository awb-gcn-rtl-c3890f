// tb_omega_network: 8-port network (three router layers). Random tasks enter on random
// inputs with random output readiness; checks that each task leaves on the output
// equal to its destination PE, unchanged, exactly once, that tasks from one input to
// one output keep their order, that backpressure occurs, and that with all outputs
// ready a single task needs LOG router stages to cross.
`timescale 1ns/1ps
module tb_omega_network;
  import awb_pkg::*;
  localparam int LOG = 3, N = 2**LOG, BUF = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] in_valid = '0, in_ready, out_valid, out_ready = '0;
  task_t in_task [N], out_task [N];
  logic busy;
  omega_network #(.LOG(LOG), .BUF(BUF)) dut (.*);
  int checks = 0, failures = 0, bp = 0, sent = 0, recv = 0;
  int last_seq [N][N];
  bit acc [N];
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  // task fields: pe = destination, slot = source input, a = sequence number, b = checksum
  initial begin
    int lat;
    for (int i = 0; i < N; i++) begin in_task[i] = '0; acc[i] = 1; for (int j = 0; j < N; j++) last_seq[i][j] = -1; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // latency of one task through an empty network
    out_ready = '1;
    in_valid[3] = 1; in_task[3] = '{pe: 16'd5, slot: 16'd3, a: 32'd0, b: 32'h5a5a};
    @(negedge clk);
    in_valid = '0;
    lat = 1;
    while (!out_valid[5] && lat < 20) begin @(negedge clk); lat++; end
    chk(lat == LOG, $sformatf("latency %0d", lat));
    @(negedge clk);
    for (int cyc = 0; cyc < 3000; cyc++) begin
      for (int i = 0; i < N; i++) if (acc[i]) begin
        in_valid[i] = cyc < 2800 && ($urandom % 3) != 0;
        in_task[i] = '{pe: 16'($urandom % N), slot: 16'(i), a: 32'(cyc), b: 32'($urandom)};
      end
      out_ready = (cyc / 300) % 2 ? N'($urandom) : '1;
      #1;
      for (int o = 0; o < N; o++) if (out_valid[o] && out_ready[o]) begin
        int src;
        src = out_task[o].slot;
        chk(out_task[o].pe == o, "wrong output");
        chk(int'(out_task[o].a) > last_seq[src][o], "order");
        last_seq[src][o] = out_task[o].a;
        recv++;
      end
      for (int i = 0; i < N; i++) begin
        acc[i] = !in_valid[i] || in_ready[i];
        if (in_valid[i] && in_ready[i]) sent++;
        if (in_valid[i] && !in_ready[i]) bp++;
      end
      @(negedge clk);
    end
    chk(!busy, "drained");
    chk(sent == recv, $sformatf("sent %0d received %0d", sent, recv));
    chk(bp > 0, "no backpressure");
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
