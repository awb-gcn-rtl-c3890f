// smoothing_unit: distribution smoothing in the final layer of the Omega network.
//
// The task leaving Omega output d is meant for PE d. Before it is pushed into a task
// queue, the pending-task counts of the queues of PEs d-HOPS..d+HOPS are compared and
// the task goes to the queue with the fewest pending tasks (the paper: "the TQ usages
// among neighbors are compared and then the task is routed to the PE with the lowest
// TQ usage"). The task keeps its owner bank and slot, so its result still lands in
// PE d's ACC bank. The extra links of the paper's augmented final layer, which let PEs
// at a group edge reach the next group, correspond here to reaching any neighbour up
// to HOPS away regardless of grouping.
//
// One queue accepts at most one task per cycle. Outputs are resolved in index order:
// each task takes the least-loaded neighbour queue not yet taken in this cycle, ties
// going to the nearest queue, and waits (out_ready low) if all are full or taken. The
// order of resolution and the tie rule are this design's choices.
//
// Interface: in_valid/in_task/in_ready from the Omega outputs; tq_count/tq_full from
// the PEs; push/push_data to the PEs; fwd counts tasks sent to a neighbour this cycle.
// Timing: purely combinational.
module smoothing_unit
  import awb_pkg::*;
#(
  parameter int NPE      = 1024,
  parameter int HOPS     = 2,
  parameter int TQ_DEPTH = 8
) (
  input  logic [NPE-1:0] in_valid,
  input  task_t          in_task [NPE],
  output logic [NPE-1:0] in_ready,
  input  logic [$clog2(TQ_DEPTH+1)-1:0] tq_count [NPE],
  input  logic [NPE-1:0] tq_full,
  output logic [NPE-1:0] push,
  output task_t          push_data [NPE],
  output logic [15:0]    fwd
);
  localparam int CW = $clog2(TQ_DEPTH+1);

  always_comb begin
    logic [NPE-1:0] taken;
    int             best, q;
    logic [CW:0]    best_c;
    best     = -1;
    best_c   = '1;
    q        = 0;
    taken    = '0;
    in_ready = '0;
    push     = '0;
    fwd      = '0;
    for (int i = 0; i < NPE; i++) push_data[i] = in_task[i];
    for (int d = 0; d < NPE; d++) begin
      if (in_valid[d]) begin
        best   = -1;
        best_c = '1;
        // Candidates in order of distance: d, d-1, d+1, d-2, d+2, ...
        for (int k = 0; k <= 2*HOPS; k++) begin
          q = (k == 0) ? d : ((k % 2 == 1) ? d - (k + 1) / 2 : d + k / 2);
          if (q >= 0 && q < NPE) begin
            if (!taken[q] && !tq_full[q] && {1'b0, tq_count[q]} < best_c) begin
              best   = q;
              best_c = {1'b0, tq_count[q]};
            end
          end
        end
        if (best >= 0) begin
          taken[best]     = 1'b1;
          push[best]      = 1'b1;
          push_data[best] = in_task[d];
          in_ready[d]     = 1'b1;
          if (best != d) fwd = fwd + 16'd1;
        end
      end
    end
  end
endmodule
