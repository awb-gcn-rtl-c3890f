// pe: one processing element with its task queue, RaW check unit, stall buffer, MAC
// and address-generation unit (AGU).
//
// Tasks arrive from the distribution-smoothing stage into the TQ. Every cycle the PE
// picks at most one task to issue: first the oldest stall-buffer entry that is free of
// hazards, otherwise the TQ head. The AGU reads the partial result c(i,k) from the ACC
// bank the task names (its own or, for a task offloaded by a neighbour, the
// neighbour's), the MAC adds the product to it, and T cycles later the AGU writes the
// sum back to the same bank and slot. This is the four-step task flow of the paper
// ("(1) performs the multiplication, (2) fetches the partial result, (3) accumulates,
// (4) updates the ACC buffers"), with the accumulation of offloaded work done in the
// neighbour, as the paper says.
//
// RaW check: a task must not read a slot whose update is still in a MAC pipeline. The
// paper checks the row index against the rows in flight in the MAC and parks a
// conflicting task in a stall buffer of size T. Because offloaded tasks make up to
// 2*HOPS+1 PEs write the same bank, this design also compares against the in-flight
// tags of the PEs up to 2*HOPS away, and lets a PE issue a tag another lower-numbered
// PE in that range also holds pending only after that PE has issued it (a fixed
// priority that cannot deadlock: the lowest holder is blocked only by in-flight work).
// When the TQ head is hazardous and the stall buffer has room, it moves there, so
// later tasks are not blocked behind it.
//
// Interface: push side of the TQ; peer_inflight/peer_pending from the neighbours;
// rd_* / wb_* towards the ACC banks; idle when the TQ, stall buffer and MAC are empty;
// stall is high in a cycle in which a hazard held back a task.
module pe
  import awb_pkg::*;
#(
  parameter int T        = 4,
  parameter int HOPS     = 2,
  parameter int TQ_DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  // task queue
  input  logic  push,
  input  task_t push_data,
  output logic  tq_full,
  output logic  tq_empty,
  output logic [$clog2(TQ_DEPTH+1)-1:0] tq_count,
  // RaW check against neighbours: in-flight tags of PEs p-2H..p+2H except p,
  // pending tags of PEs p-2H..p-1
  input  tag_t  peer_inflight [4*HOPS][T],
  input  tag_t  peer_pending  [2*HOPS][T+1],
  output tag_t  my_inflight [T],
  output tag_t  my_pending  [T+1],
  // ACC bank access (AGU)
  output logic  rd_en,
  output logic [15:0] rd_bank,
  output logic [15:0] rd_slot,
  input  fp32_t rd_data,
  output logic  wb_valid,
  output logic [15:0] wb_bank,
  output logic [15:0] wb_slot,
  output fp32_t wb_data,
  // status
  output logic  idle,
  output logic  stall
);
  task_t tq_head;
  logic  tq_pop;

  task_queue #(.DEPTH(TQ_DEPTH)) u_tq (
    .clk, .rst_n,
    .push, .push_data, .full(tq_full),
    .pop(tq_pop), .head_data(tq_head), .empty(tq_empty), .count(tq_count)
  );

  // Stall buffer
  task_t sb      [T];
  logic  sb_v    [T];

  function automatic tag_t tag_of(input task_t t);
    tag_t g;
    g.v = 1'b1; g.bank = t.pe; g.slot = t.slot;
    return g;
  endfunction

  function automatic logic same(input tag_t x, input tag_t y);
    return x.v && y.v && x.bank == y.bank && x.slot == y.slot;
  endfunction

  function automatic logic hazard(input tag_t g, input tag_t own [T],
                                  input tag_t pin [4*HOPS][T], input tag_t ppd [2*HOPS][T+1]);
    logic h;
    h = 1'b0;
    for (int i = 0; i < T; i++) h |= same(g, own[i]);
    for (int n = 0; n < 4*HOPS; n++)
      for (int i = 0; i < T; i++) h |= same(g, pin[n][i]);
    for (int n = 0; n < 2*HOPS; n++)
      for (int i = 0; i <= T; i++) h |= same(g, ppd[n][i]);
    return h;
  endfunction

  // Issue selection
  logic  iss_v;
  task_t iss_t;
  logic  iss_from_sb;
  int    iss_sb;
  logic  park;        // TQ head moves to the stall buffer
  int    free_sb;
  logic  head_haz;

  always_comb begin
    iss_v = 1'b0; iss_t = tq_head; iss_from_sb = 1'b0; iss_sb = 0;
    park = 1'b0; free_sb = -1; tq_pop = 1'b0;
    head_haz = !tq_empty && hazard(tag_of(tq_head), my_inflight, peer_inflight, peer_pending);
    for (int i = T - 1; i >= 0; i--) if (!sb_v[i]) free_sb = i;
    for (int i = T - 1; i >= 0; i--)
      if (sb_v[i] && !hazard(tag_of(sb[i]), my_inflight, peer_inflight, peer_pending)) begin
        iss_v = 1'b1; iss_t = sb[i]; iss_from_sb = 1'b1; iss_sb = i;
      end
    if (!tq_empty) begin
      if (!head_haz && !iss_v) begin
        iss_v = 1'b1; iss_t = tq_head; tq_pop = 1'b1;
      end else if (head_haz && free_sb >= 0 && !(iss_from_sb && iss_sb == free_sb)) begin
        park = 1'b1; tq_pop = 1'b1;
      end
    end
    stall = head_haz;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < T; i++) sb_v[i] <= 1'b0;
    end else begin
      if (iss_from_sb) sb_v[iss_sb] <= 1'b0;
      if (park) begin
        sb_v[free_sb] <= 1'b1;
        sb[free_sb]   <= tq_head;
      end
    end
  end

  // AGU + MAC
  assign rd_en   = iss_v;
  assign rd_bank = iss_t.pe;
  assign rd_slot = iss_t.slot;

  tag_t  out_tag;
  mac_unit #(.T(T)) u_mac (
    .clk, .rst_n,
    .in_valid(iss_v), .in_a(iss_t.a), .in_b(iss_t.b), .in_acc(rd_data),
    .in_tag(iss_v ? tag_of(iss_t) : '0),
    .out_valid(wb_valid), .out_sum(wb_data), .out_tag(out_tag),
    .pipe_tags(my_inflight)
  );
  assign wb_bank = out_tag.bank;
  assign wb_slot = out_tag.slot;

  always_comb begin
    for (int i = 0; i < T; i++) begin
      my_pending[i]   = sb_v[i] ? tag_of(sb[i]) : '0;
    end
    my_pending[T] = tq_empty ? '0 : tag_of(tq_head);
  end

  always_comb begin
    idle = tq_empty;
    for (int i = 0; i < T; i++) idle &= !sb_v[i] && !my_inflight[i].v;
  end
endmodule
