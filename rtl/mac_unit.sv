// mac_unit: the pipelined floating-point multiply-accumulate unit (MAC) of a PE.
//
// Computes a * b + acc in IEEE single precision (the paper: "the computations are all
// floating-point"; "the pipelined MAC usually takes several cycles to process, but can
// still accept new tasks while processing"). Stage 0 registers the product with the
// partial result read from the ACC buffer; stage 1 adds; the remaining stages only
// delay, so the total latency is T cycles and one task can enter per cycle. The paper
// calls this delay T but gives no value; T = 4 and the split of the work over the
// stages are this design's choices. The arithmetic is awb_pkg::fp32_mul/fp32_add
// (flush-to-zero, truncating).
//
// Each task carries a tag (the ACC bank and slot it will update). pipe_tags lists the
// tags of all tasks in flight: the RaW check units compare new tasks against them.
// Timing: a task accepted in cycle t appears on out_* in cycle t+T.
module mac_unit
  import awb_pkg::*;
#(
  parameter int T = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t in_a,
  input  fp32_t in_b,
  input  fp32_t in_acc,
  input  tag_t  in_tag,
  output logic  out_valid,
  output fp32_t out_sum,
  output tag_t  out_tag,
  output tag_t  pipe_tags [T]
);
  fp32_t prod_q, acc_q;
  fp32_t val_q [T];     // val_q[0] unused (product/acc held apart), 1..T-1 hold sums
  tag_t  tag_q [T];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < T; i++) tag_q[i] <= '0;
    end else begin
      tag_q[0] <= in_valid ? in_tag : '0;
      for (int i = 1; i < T; i++) tag_q[i] <= tag_q[i-1];
    end
  end

  always_ff @(posedge clk) begin
    prod_q   <= fp32_mul(in_a, in_b);
    acc_q    <= in_acc;
    val_q[0] <= '0;
    val_q[1] <= fp32_add(prod_q, acc_q);
    for (int i = 2; i < T; i++) val_q[i] <= val_q[i-1];
  end

  assign out_valid = tag_q[T-1].v;
  assign out_sum   = val_q[T-1];
  assign out_tag   = tag_q[T-1];
  assign pipe_tags = tag_q;

  initial assert (T >= 2) else $error("mac_unit needs T >= 2");
endmodule
