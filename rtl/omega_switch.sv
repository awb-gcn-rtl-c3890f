// omega_switch: one 2x2 router of the Omega network in TDQ-2.
//
// Each input carries a task; the task goes to output 0 or 1 according to one bit of its
// destination PE id (bit SEL_BIT, chosen by the network per stage: PE_Des[n-1] in the
// first layer down to PE_Des[0] in the last). Each output has a small local buffer, as
// the paper asks ("each router in the Omega-network has a local buffer in case the
// buffer of the next stage is saturated"); the buffer is a task_queue of depth BUF.
// When both inputs want the same output in one cycle, a round-robin bit picks the
// winner and the loser waits (valid/ready backpressure). BUF and the round-robin choice
// are this design's own.
//
// Timing: a task accepted in cycle t can leave the switch in cycle t+1.
module omega_switch
  import awb_pkg::*;
#(
  parameter int SEL_BIT = 0,
  parameter int BUF     = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  in_valid,
  input  task_t       in_task [2],
  output logic [1:0]  in_ready,
  output logic [1:0]  out_valid,
  output task_t       out_task [2],
  input  logic [1:0]  out_ready
);
  logic [1:0] want;      // output each input asks for
  logic [1:0] push;      // per output
  task_t      push_t [2];
  logic [1:0] full, empty;
  logic       rr;        // which input wins a conflict

  always_comb begin
    for (int i = 0; i < 2; i++) want[i] = in_task[i].pe[SEL_BIT];
    in_ready = '0;
    push     = '0;
    push_t[0] = in_task[0];
    push_t[1] = in_task[1];
    for (int o = 0; o < 2; o++) begin
      logic r0, r1;
      r0 = in_valid[0] && (want[0] == o[0]);
      r1 = in_valid[1] && (want[1] == o[0]);
      if (!full[o]) begin
        if (r0 && (!r1 || !rr)) begin
          in_ready[0] = 1'b1; push[o] = 1'b1; push_t[o] = in_task[0];
        end else if (r1) begin
          in_ready[1] = 1'b1; push[o] = 1'b1; push_t[o] = in_task[1];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= 1'b0;
    else if (in_valid[0] && in_valid[1] && want[0] == want[1]) rr <= ~rr;
  end

  for (genvar o = 0; o < 2; o++) begin : g_out
    task_queue #(.DEPTH(BUF)) u_buf (
      .clk, .rst_n,
      .push(push[o]), .push_data(push_t[o]), .full(full[o]),
      .pop(out_valid[o] && out_ready[o]), .head_data(out_task[o]),
      .empty(empty[o]), .count()
    );
    assign out_valid[o] = !empty[o];
  end
endmodule
