// omega_network: the multi-stage Omega network of TDQ-2 that routes CSC non-zeros to
// the PE owning their row.
//
// N = 2^LOG inputs and outputs, LOG stages of N/2 omega_switch routers. Before every
// stage the positions are perfectly shuffled (position q moves to rotate-left(q)); the
// switch at stage s then sets the low position bit to bit LOG-1-s of the destination
// PE id. After LOG stages the position equals the destination, so output p carries
// only tasks for PE p. This matches the paper's figure, where layer 1, 2, 3 of the
// 8-PE network are steered by PE_Des[2], PE_Des[1], PE_Des[0]. Every router has its
// own output buffer, so the network is a pipeline of LOG stages with backpressure.
//
// Interface: in_valid/in_task/in_ready per input lane, out_valid/out_task/out_ready
// per PE. busy is high while any task is inside.
// Timing: a task with no contention crosses the network in LOG cycles.
module omega_network
  import awb_pkg::*;
#(
  parameter int LOG = 10,
  parameter int BUF = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [2**LOG-1:0] in_valid,
  input  task_t            in_task [2**LOG],
  output logic [2**LOG-1:0] in_ready,
  output logic [2**LOG-1:0] out_valid,
  output task_t            out_task [2**LOG],
  input  logic [2**LOG-1:0] out_ready,
  output logic             busy
);
  localparam int N = 2**LOG;

  // Perfect shuffle: rotate the LOG-bit position left by one.
  function automatic int shuf(input int q);
    return ((q << 1) | (q >> (LOG - 1))) & (N - 1);
  endfunction

  // Per stage: ov/ot are the router outputs (before the next shuffle), orr the ready
  // returned to them; iv/it/ir are the router inputs after the shuffle.
  for (genvar s = 0; s < LOG; s++) begin : g_stage
    logic [N-1:0] iv, ir, ov, orr;
    task_t        it [N];
    task_t        ot [N];
    // Shuffle wiring: producer position q feeds router input shuf(q).
    for (genvar q = 0; q < N; q++) begin : g_shuf
      if (s == 0) begin : g_first
        assign iv[shuf(q)] = in_valid[q];
        assign it[shuf(q)] = in_task[q];
        assign in_ready[q] = ir[shuf(q)];
      end else begin : g_mid
        assign iv[shuf(q)]            = g_stage[s-1].ov[q];
        assign it[shuf(q)]            = g_stage[s-1].ot[q];
        assign g_stage[s-1].orr[q]    = ir[shuf(q)];
      end
    end
    for (genvar k = 0; k < N/2; k++) begin : g_sw
      task_t itk [2];
      task_t otk [2];
      assign itk[0] = it[2*k];
      assign itk[1] = it[2*k+1];
      omega_switch #(.SEL_BIT(LOG - 1 - s), .BUF(BUF)) u_sw (
        .clk, .rst_n,
        .in_valid (iv[2*k+1:2*k]),
        .in_task  (itk),
        .in_ready (ir[2*k+1:2*k]),
        .out_valid(ov[2*k+1:2*k]),
        .out_task (otk),
        .out_ready(orr[2*k+1:2*k])
      );
      assign ot[2*k]   = otk[0];
      assign ot[2*k+1] = otk[1];
    end
    assign busy_v[s] = |ov;
  end

  logic [LOG-1:0] busy_v;
  assign out_valid           = g_stage[LOG-1].ov;
  assign out_task            = g_stage[LOG-1].ot;
  assign g_stage[LOG-1].orr  = out_ready;
  assign busy                = |busy_v;
endmodule
