// task_queue: the Task Queue (TQ) in front of each PE.
//
// A synchronous FIFO of tasks with a counter of pending entries. The counter is what
// distribution smoothing compares between neighbouring queues, and its zero state is
// the "empty" signal the PE Status Monitor of the autotuner watches. Both follow the
// paper ("each TQ has a counter to track the number of pending tasks; these can trigger
// an empty signal when reaching zero"). The depth is not given by the paper; DEPTH is
// this design's choice.
//
// Interface: push/push_data write when not full; pop takes the head (head_data is the
// head, valid when !empty). A push and a pop may happen in the same cycle.
// Timing: a pushed task is visible at the head the next cycle.
module task_queue
  import awb_pkg::*;
#(
  parameter int DEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  task_t                    push_data,
  output logic                     full,
  input  logic                     pop,
  output task_t                    head_data,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  task_t          mem [DEPTH];
  logic [AW-1:0]  rd_ptr, wr_ptr;

  assign empty     = (count == '0);
  assign full      = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign head_data = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push && !full) begin
        mem[wr_ptr] <= push_data;
        wr_ptr      <= inc(wr_ptr);
      end
      if (pop && !empty) rd_ptr <= inc(rd_ptr);
      count <= count + ((push && !full) ? 1'b1 : 1'b0) - ((pop && !empty) ? 1'b1 : 1'b0);
    end
  end

  // A pop of an empty queue or a push into a full one is a protocol error upstream.
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
endmodule
