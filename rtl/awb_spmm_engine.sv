// awb_spmm_engine: one SpMM engine of the accelerator, S x B = C column by column,
// with the three runtime rebalancing techniques (distribution smoothing, remote
// switching, evil-row remapping). This is the engine the paper uses for A x (XW),
// where S = A is ultra-sparse and stored in CSC (TDQ-2 with an Omega network).
//
// Data path, per output column k (one "round"):
//   spmmem  streams the CSC non-zeros of S, NPE lanes per cycle;
//   dcm     supplies b(j,k) for the column j of each non-zero;
//   shuffle_switch rewrites the destination PE (remote switching, evil rows);
//   omega_network routes each task to its destination PE;
//   smoothing_unit sends it to the least-loaded TQ within HOPS;
//   pe_array multiplies, accumulates into the ACC banks with RaW checks;
//   output_mux reads the finished column out, row by row slot, with optional ReLU.
// Autotuner: pesm watches the PE done signals during the round, the Super-PE
// profilers count non-zeros per row, and between rounds wdc (with ugt) updates the
// Distribution Switch Table and the evil-row configuration for the next round.
//
// Control: load S once (nz_wr_*, nnz; it is reused for every column), load column k
// of B (dcm_wr_*), pulse col_start. The engine computes, then presents the column on
// out_valid/out_slot/out_data for ROWS cycles (lane p carries row p*ROWS + out_slot),
// then tunes and pulses col_done. The next column may be loaded into the DCM after
// out_valid has fallen. The counters report the mechanisms at work.
//
// Defaults follow the paper's main evaluated configuration where it gives a number:
// 1024 PEs, 2-hop smoothing (Design D), four tuples per round, two tracked rounds,
// one Super-PE and four Labor-PEs per 128 PEs. Everything else (ROWS, MAC latency T,
// queue and buffer depths, memory sizes, g, beta) is this design's choice.
module awb_spmm_engine
  import awb_pkg::*;
#(
  parameter int LOG       = 10,             // NPE = 2^LOG
  parameter int ROWS      = 16,             // rows of C per PE (ACC bank depth)
  parameter int T         = 4,              // MAC latency
  parameter int HOPS      = 2,              // distribution smoothing reach
  parameter int TQ_DEPTH  = 8,
  parameter int OBUF      = 2,              // Omega router buffer depth
  parameter int NNZ_MAX   = 16384,
  parameter int DCM_DEPTH = (2**LOG) * ROWS,
  parameter int K         = 4,              // PE tuples per round
  parameter int TRACK     = 2,              // rounds a tuple is tracked
  parameter int GROUP     = 128,            // PEs per Super-PE
  parameter int LABOR     = 4,              // Labor-PEs per Super-PE
  parameter int TW        = 24,
  parameter int G         = 3,              // granularity g of the gap approximation
  parameter int BETA      = 1,              // evil-row comparator shift
  localparam int NPE      = 2**LOG,
  localparam int NG       = NPE / GROUP
) (
  input  logic        clk,
  input  logic        rst_n,
  // sparse matrix load (off-chip side)
  input  logic        nz_wr_en,
  input  logic [31:0] nz_wr_addr,
  input  nz_t         nz_wr_data,
  input  logic [31:0] nnz,
  // dense column load
  input  logic        dcm_wr_en,
  input  logic [31:0] dcm_wr_addr,
  input  fp32_t       dcm_wr_data,
  // control
  input  logic        col_start,
  input  logic        relu_en,
  output logic        busy,
  output logic        col_done,
  // result column to the next engine
  output logic        out_valid,
  output logic [15:0] out_slot,
  output fp32_t       out_data [NPE],
  // counters (since reset)
  output logic [31:0] cnt_round_cycles,     // cycles of the last round's compute phase
  output logic [31:0] cnt_busy_pe_cycles,   // sum over cycles of busy PEs, last round
  output logic [31:0] cnt_forward,          // tasks sent to a neighbour's TQ
  output logic [31:0] cnt_raw_stall,        // PE-cycles held back by a RaW hazard
  output logic [31:0] cnt_net_backpressure, // cycles an input lane was refused
  output logic [31:0] cnt_switch,           // new remote-switching tuples
  output logic [31:0] cnt_update,           // switch-fraction updates of tracked tuples
  output logic [31:0] cnt_profile,          // workloads sent to a Super-PE for profiling
  output logic [31:0] cnt_remap,            // evil rows remapped to Labor-PEs
  output logic [31:0] cnt_evil_nz           // non-zeros that went to Labor-PEs
);
  localparam int CW = $clog2(TQ_DEPTH + 1);

  // ---------------- control ----------------
  typedef enum logic [2:0] {C_IDLE, C_RUN, C_EVIL, C_OUT, C_TUNE, C_DONE} cst_t;
  cst_t cst;
  logic feed_start, feed_busy, feed_done, fed;
  logic round_start, complete, pesm_ready, tune_start, tune_done;
  logic [15:0] oslot;
  logic omega_busy;
  logic [NPE-1:0] pe_idle, pe_stall;

  assign round_start = (cst == C_IDLE) && col_start;
  assign feed_start  = round_start;
  assign complete    = fed && !feed_busy && !omega_busy && (&pe_idle);
  assign busy        = (cst != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst <= C_IDLE; fed <= 1'b0; oslot <= '0; col_done <= 1'b0; tune_start <= 1'b0;
    end else begin
      col_done   <= 1'b0;
      tune_start <= 1'b0;
      case (cst)
        C_IDLE: if (col_start) begin cst <= C_RUN; fed <= 1'b0; end
        C_RUN: begin
          if (feed_done) fed <= 1'b1;
          if (pesm_ready) begin cst <= C_EVIL; oslot <= 16'(ROWS); end
        end
        C_EVIL: begin cst <= C_OUT; oslot <= '0; end      // evil shares read and summed
        C_OUT: begin
          if (32'(oslot) == ROWS - 1) begin cst <= C_TUNE; tune_start <= 1'b1; end
          oslot <= oslot + 16'd1;
        end
        C_TUNE: if (tune_done) cst <= C_DONE;
        C_DONE: begin col_done <= 1'b1; cst <= C_IDLE; end
        default: cst <= C_IDLE;
      endcase
    end
  end

  assign out_valid = (cst == C_OUT);
  assign out_slot  = oslot;

  // ---------------- stream side ----------------
  logic [NPE-1:0] lane_valid, lane_ready;
  nz_t            lane_nz  [NPE];
  logic [31:0]    lane_col [NPE];
  logic [31:0]    lane_row [NPE];
  fp32_t          lane_a   [NPE];
  fp32_t          lane_b   [NPE];
  task_t          lane_task[NPE];

  spmmem #(.NNZ_MAX(NNZ_MAX), .LANES(NPE)) u_spmmem (
    .clk, .rst_n,
    .wr_en(nz_wr_en), .wr_addr(nz_wr_addr), .wr_data(nz_wr_data), .nnz,
    .start(feed_start), .lane_valid, .lane_nz, .lane_ready,
    .busy(feed_busy), .done(feed_done)
  );

  always_comb
    for (int l = 0; l < NPE; l++) begin
      lane_col[l] = lane_nz[l].col;
      lane_row[l] = lane_nz[l].row;
      lane_a[l]   = lane_nz[l].val;
    end

  dcm #(.DEPTH(DCM_DEPTH), .LANES(NPE)) u_dcm (
    .clk, .wr_en(dcm_wr_en), .wr_addr(dcm_wr_addr), .wr_data(dcm_wr_data),
    .rd_addr(lane_col), .rd_data(lane_b)
  );

  // ---------------- autotuner tables ----------------
  logic [15:0]    partner [NPE];
  logic [15:0]    nsw     [NPE];
  logic [NPE-1:0] exclude;
  logic [NG-1:0]  profiling, evil_valid;
  logic [31:0]    evil_row [NG];
  logic [15:0]    super_id [NG];
  logic [15:0]    labor_id [NG][LABOR];
  logic [15:0]    evil_hits;

  shuffle_switch #(.NPE(NPE), .ROWS(ROWS), .LANES(NPE), .LABOR(LABOR), .NG(NG)) u_ss (
    .clk, .rst_n,
    .in_valid(lane_valid), .in_row(lane_row), .in_a(lane_a), .in_b(lane_b),
    .in_take(lane_ready), .out_task(lane_task),
    .partner, .nsw, .evil_valid, .evil_row, .labor_id, .evil_hits
  );

  // ---------------- Omega network + smoothing ----------------
  logic [NPE-1:0] net_ov, net_or;
  task_t          net_ot [NPE];
  logic [NPE-1:0] push, tq_full, tq_empty;
  task_t          push_data [NPE];
  logic [CW-1:0]  tq_count [NPE];
  logic [15:0]    fwd;

  omega_network #(.LOG(LOG), .BUF(OBUF)) u_net (
    .clk, .rst_n,
    .in_valid(lane_valid), .in_task(lane_task), .in_ready(lane_ready),
    .out_valid(net_ov), .out_task(net_ot), .out_ready(net_or), .busy(omega_busy)
  );

  smoothing_unit #(.NPE(NPE), .HOPS(HOPS), .TQ_DEPTH(TQ_DEPTH)) u_smooth (
    .in_valid(net_ov), .in_task(net_ot), .in_ready(net_or),
    .tq_count, .tq_full, .push, .push_data, .fwd
  );

  // ---------------- PEs and ACC buffers ----------------
  logic  bank_out_en;
  fp32_t bank_out [NPE];

  assign bank_out_en = (cst == C_EVIL) || (cst == C_OUT);

  pe_array #(.NPE(NPE), .ROWS(ROWS), .T(T), .HOPS(HOPS), .TQ_DEPTH(TQ_DEPTH)) u_pes (
    .clk, .rst_n,
    .push, .push_data, .tq_full, .tq_empty, .tq_count,
    .idle(pe_idle), .stall(pe_stall),
    .out_en(bank_out_en), .out_slot(oslot), .out_data(bank_out)
  );

  // ---------------- Super-PE profilers, Labor-PE adder trees ----------------
  logic [15:0] prof_slot [NG];
  fp32_t       evil_sum  [NG];

  for (genvar g = 0; g < NG; g++) begin : g_grp
    localparam int SID = g * GROUP;
    fp32_t part [LABOR];
    evil_profiler #(.ROWS(ROWS), .CW(TW)) u_prof (
      .clk, .rst_n, .clear(round_start),
      .in_valid(profiling[g] && net_ov[SID] && net_or[SID]),
      .in_slot(net_ot[SID].slot),
      .max_slot(prof_slot[g]), .max_count()
    );
    for (genvar l = 0; l < LABOR; l++) begin : g_part
      assign part[l] = bank_out[SID + 3 + l * (GROUP / LABOR)];
    end
    evil_row_acc #(.LABOR(LABOR)) u_eacc (
      .clk, .rst_n, .capture(cst == C_EVIL), .part, .sum_q(evil_sum[g])
    );
  end

  output_mux #(.NPE(NPE), .ROWS(ROWS), .NG(NG)) u_omux (
    .slot(oslot), .bank_data(bank_out), .partner, .nsw,
    .evil_valid, .evil_row, .evil_sum, .relu_en, .out_data
  );

  // ---------------- Autotuner: PESM + WDC (+UGT inside) ----------------
  logic [15:0]   under_id [K], over_id [K];
  logic [TW-1:0] under_t [K], over_t [K];
  logic [K-1:0]  tuple_v;
  logic [15:0]   watch_id [2*K*TRACK];
  logic [TW-1:0] watch_t  [2*K*TRACK];

  pesm #(.NPE(NPE), .K(K), .NW(2*K*TRACK), .TW(TW)) u_pesm (
    .clk, .rst_n, .round_start, .scan_en(fed), .done_in(pe_idle), .complete,
    .exclude, .ready(pesm_ready),
    .under_id, .under_t, .over_id, .over_t, .tuple_v, .watch_id, .watch_t
  );

  wdc #(.NPE(NPE), .ROWS(ROWS), .K(K), .TRACK(TRACK), .GROUP(GROUP), .LABOR(LABOR),
        .TW(TW), .G(G), .BETA(BETA)) u_wdc (
    .clk, .rst_n, .start(tune_start), .done(tune_done),
    .under_id, .under_t, .over_id, .over_t, .tuple_v, .watch_id, .watch_t,
    .prof_slot, .partner, .nsw, .exclude, .profiling, .evil_valid, .evil_row,
    .super_id, .labor_id,
    .n_switch(cnt_switch), .n_update(cnt_update), .n_profile(cnt_profile), .n_remap(cnt_remap)
  );

  // ---------------- counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_round_cycles <= '0; cnt_busy_pe_cycles <= '0; cnt_forward <= '0;
      cnt_raw_stall <= '0; cnt_net_backpressure <= '0; cnt_evil_nz <= '0;
    end else begin
      if (round_start) begin
        cnt_round_cycles   <= '0;
        cnt_busy_pe_cycles <= '0;
      end else if (cst == C_RUN && !complete) begin
        cnt_round_cycles   <= cnt_round_cycles + 1;
        cnt_busy_pe_cycles <= cnt_busy_pe_cycles + 32'(NPE - $countones(pe_idle));
      end
      cnt_forward          <= cnt_forward + 32'(fwd);
      cnt_raw_stall        <= cnt_raw_stall + 32'($countones(pe_stall));
      if (|(lane_valid & ~lane_ready)) cnt_net_backpressure <= cnt_net_backpressure + 1;
      cnt_evil_nz          <= cnt_evil_nz + 32'(evil_hits);
    end
  end

  initial assert (ROWS == 2**$clog2(ROWS)) else $error("ROWS must be a power of two");
endmodule
