// tb_smoothing_unit: random Omega outputs and random queue counts. Checks that each
// accepted task is pushed into exactly one queue within HOPS of its destination, that
// the queue chosen has no more pending tasks than any other free, not-full candidate
// still untaken when the task was placed (index order), that no queue gets two tasks or
// a task while full, that a task is refused only when no candidate was free, and the
// forward count.
`timescale 1ns/1ps
module tb_smoothing_unit;
  import awb_pkg::*;
  localparam int NPE = 16, HOPS = 2, TQ_DEPTH = 8, CW = $clog2(TQ_DEPTH+1);
  logic [NPE-1:0] in_valid, in_ready, tq_full, push;
  task_t in_task [NPE], push_data [NPE];
  logic [CW-1:0] tq_count [NPE];
  logic [15:0] fwd;
  smoothing_unit #(.NPE(NPE), .HOPS(HOPS), .TQ_DEPTH(TQ_DEPTH)) dut (.*);
  int checks = 0, failures = 0, nfwd = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    for (int it = 0; it < 2000; it++) begin
      bit taken [NPE];
      int f;
      for (int p = 0; p < NPE; p++) begin
        in_valid[p] = $urandom % 2;
        in_task[p]  = '{pe: 16'(p), slot: 16'(it), a: $urandom, b: $urandom};
        tq_count[p] = CW'($urandom % (TQ_DEPTH + 1));
        tq_full[p]  = tq_count[p] == TQ_DEPTH;
        taken[p] = 0;
      end
      #1;
      f = 0;
      for (int d = 0; d < NPE; d++) if (in_valid[d]) begin
        int q, mn;
        mn = 1000;
        for (int k = -HOPS; k <= HOPS; k++)
          if (d + k >= 0 && d + k < NPE && !taken[d + k] && !tq_full[d + k] && tq_count[d + k] < mn) mn = tq_count[d + k];
        q = -1;
        for (int k = -HOPS; k <= HOPS; k++)
          if (d + k >= 0 && d + k < NPE && push[d + k] && push_data[d + k] == in_task[d]) q = d + k;
        if (mn == 1000) chk(!in_ready[d] && q < 0, "refused correctly");
        else begin
          chk(in_ready[d] && q >= 0, "accepted");
          if (q >= 0) begin
            chk(!taken[q] && !tq_full[q], "free queue");
            chk(int'(tq_count[q]) == mn, "least loaded");
            taken[q] = 1;
            if (q != d) f++;
          end
        end
      end
      for (int p = 0; p < NPE; p++) chk(push[p] == taken[p], "push only where placed");
      chk(int'(fwd) == f, "fwd count");
      nfwd += f;
    end
    chk(nfwd > 0, "forwarding happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
