// wdc: the Workload Distribution Controller of the autotuner, with the Distribution
// Switch Table and the round-to-round tuning sequence that drives the UGT.
//
// The Distribution Switch Table holds, per PE, the partner it exchanges rows with and
// the number of rows (slots 0..nsw-1) exchanged; the Shuffle Switches read it. Between
// two rounds (output columns) the controller runs, in this order:
//
//  1. Evil rows. A Super-PE group that profiled a switched-in workload during the round
//     now knows its evil row (owner PE * ROWS + slot with the most non-zeros). The
//     temporary switch with the Super-PE is undone and the row is remapped to the
//     group's Labor-PEs from the next round on (paper Section 4.3).
//  2. Tracked tuples. Each tuple switched in the previous TRACK rounds has its
//     post-switching gap measured (PESM watch times) and converted by the UGT; the
//     row count is updated by the result (Equation 3, j > 0), clamped to 0..ROWS.
//     After TRACK updates the tuple's setting is frozen; it stays in the table.
//  3. New tuples from the PESM. The gap of tuple 0 (most over- vs most under-loaded)
//     in the first round becomes G_1. For tuple 0 the UGT comparator decides whether
//     the gap is too large for remote switching; if so, and the Super-PE group of the
//     over-loaded PE is free, the over-loaded PE's whole workload is switched onto the
//     Super-PE for one round of profiling. Otherwise each tuple gets N = TfSFL(q) rows
//     switched (Equation 3, j = 0) and is tracked.
//
// Switched PEs and Super-PEs are reported in exclude so the PESM does not pick them.
// Group layout (NG = NPE/GROUP groups): the Super-PE is the first PE of its group
// ("Master PE / PE 0" in the paper's figure) and the Labor-PEs sit GROUP/LABOR apart
// from offset 3 (the figure labels Labor-PEs "PE 3" and "PE 67" in a 128-PE group).
// The paper gives the group size (128) and the counts (one Super-PE, four Labor-PEs);
// the exact positions of the other Labor-PEs are this design's choice.
//
// Timing: start pulses after the PESM is ready; done pulses when the table is updated.
// Each UGT lookup takes q+2 cycles, so the sequence takes a few dozen cycles.
module wdc #(
  parameter int NPE   = 1024,
  parameter int ROWS  = 16,
  parameter int K     = 4,
  parameter int TRACK = 2,
  parameter int GROUP = 128,
  parameter int LABOR = 4,
  parameter int TW    = 24,
  parameter int G     = 3,
  parameter int BETA  = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           done,
  // from the PESM
  input  logic [15:0]    under_id [K],
  input  logic [TW-1:0]  under_t  [K],
  input  logic [15:0]    over_id  [K],
  input  logic [TW-1:0]  over_t   [K],
  input  logic [K-1:0]   tuple_v,
  output logic [15:0]    watch_id [2*K*TRACK],
  input  logic [TW-1:0]  watch_t  [2*K*TRACK],
  // from the Super-PE profilers
  input  logic [15:0]    prof_slot [NPE/GROUP],
  // Distribution Switch Table and evil-row configuration
  output logic [15:0]    partner  [NPE],
  output logic [15:0]    nsw      [NPE],
  output logic [NPE-1:0] exclude,
  output logic [NPE/GROUP-1:0] profiling,
  output logic [NPE/GROUP-1:0] evil_valid,
  output logic [31:0]    evil_row [NPE/GROUP],
  output logic [15:0]    super_id [NPE/GROUP],
  output logic [15:0]    labor_id [NPE/GROUP][LABOR],
  // event counters
  output logic [31:0]    n_switch,
  output logic [31:0]    n_update,
  output logic [31:0]    n_profile,
  output logic [31:0]    n_remap
);
  localparam int NG = NPE / GROUP;
  localparam int NT = K * TRACK;

  typedef enum logic [2:0] {S_IDLE, S_EVIL, S_TRK, S_TRK_W, S_CUR, S_CUR_W, S_DONE} st_t;
  st_t st;

  logic [NPE-1:0] locked;
  logic [15:0]    trk_over  [NT];
  logic [15:0]    trk_under [NT];
  logic [7:0]     trk_age   [NT];
  logic [NT-1:0]  trk_v;
  logic [15:0]    prof_pe   [NG];
  logic           g1_set;
  int unsigned    idx;

  // UGT
  logic                ugt_load, ugt_start, ugt_busy, ugt_done, ugt_evil;
  logic signed [16:0]  ugt_delta;
  logic [TW-1:0]       u_over, u_under, ugt_g1;

  ugt #(.TW(TW), .ROWS(ROWS), .G(G), .BETA(BETA)) u_ugt (
    .clk, .rst_n, .load_g1(ugt_load), .start(ugt_start),
    .over_t(u_over), .under_t(u_under),
    .busy(ugt_busy), .done(ugt_done), .delta_rows(ugt_delta), .evil(ugt_evil), .g1(ugt_g1)
  );

  always_comb begin
    for (int g = 0; g < NG; g++) begin
      super_id[g] = 16'(g * GROUP);
      for (int l = 0; l < LABOR; l++) labor_id[g][l] = 16'(g * GROUP + 3 + l * (GROUP / LABOR));
    end
    exclude = locked;
    for (int g = 0; g < NG; g++) exclude[g * GROUP] = 1'b1;
    for (int i = 0; i < NT; i++) begin
      watch_id[2*i]   = trk_over[i];
      watch_id[2*i+1] = trk_under[i];
    end
  end

  function automatic logic [15:0] clampn(input logic [15:0] cur, input logic signed [16:0] d);
    int v;
    v = int'(cur) + int'(d);
    if (v < 0) v = 0;
    if (v > ROWS) v = ROWS;
    return 16'(v);
  endfunction

  function automatic int free_slot(input logic [NT-1:0] v);
    for (int i = 0; i < NT; i++) if (!v[i]) return i;
    return -1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0; idx <= 0; g1_set <= 1'b0;
      locked <= '0; trk_v <= '0; profiling <= '0; evil_valid <= '0;
      ugt_load <= 1'b0; ugt_start <= 1'b0; u_over <= '0; u_under <= '0;
      n_switch <= '0; n_update <= '0; n_profile <= '0; n_remap <= '0;
      for (int p = 0; p < NPE; p++) begin partner[p] <= 16'(p); nsw[p] <= '0; end
      for (int i = 0; i < NT; i++) begin trk_over[i] <= '0; trk_under[i] <= '0; trk_age[i] <= '0; end
      for (int g = 0; g < NG; g++) begin prof_pe[g] <= '0; evil_row[g] <= '0; end
    end else begin
      done      <= 1'b0;
      ugt_load  <= 1'b0;
      ugt_start <= 1'b0;
      case (st)
        S_IDLE: if (start) st <= S_EVIL;

        S_EVIL: begin
          for (int g = 0; g < NG; g++)
            if (profiling[g]) begin
              evil_row[g]           <= 32'(prof_pe[g]) * 32'(ROWS) + 32'(prof_slot[g]);
              evil_valid[g]         <= 1'b1;
              profiling[g]          <= 1'b0;
              partner[prof_pe[g]]   <= prof_pe[g];
              nsw[prof_pe[g]]       <= '0;
              partner[g * GROUP]    <= 16'(g * GROUP);
              nsw[g * GROUP]        <= '0;
              locked[prof_pe[g]]    <= 1'b0;
              n_remap               <= n_remap + 1;
            end
          idx <= 0;
          st  <= S_TRK;
        end

        S_TRK: begin
          if (idx >= NT) begin
            idx <= 0;
            st  <= S_CUR;
          end else if (trk_v[idx]) begin
            u_over    <= watch_t[2*idx];
            u_under   <= watch_t[2*idx+1];
            ugt_start <= 1'b1;
            st        <= S_TRK_W;
          end else idx <= idx + 1;
        end

        S_TRK_W: if (ugt_done) begin
          logic [15:0] n;
          n = clampn(nsw[trk_over[idx]], ugt_delta);
          nsw[trk_over[idx]]  <= n;
          nsw[trk_under[idx]] <= n;
          n_update <= n_update + 1;
          trk_age[idx] <= trk_age[idx] + 1'b1;
          if (n == '0) begin
            // nothing left switched: release the pair
            trk_v[idx] <= 1'b0;
            locked[trk_over[idx]]  <= 1'b0;
            locked[trk_under[idx]] <= 1'b0;
            partner[trk_over[idx]]  <= trk_over[idx];
            partner[trk_under[idx]] <= trk_under[idx];
          end else if (32'(trk_age[idx]) + 1 >= TRACK) begin
            trk_v[idx] <= 1'b0;       // converged: frozen in the table
          end
          idx <= idx + 1;
          st  <= S_TRK;
        end

        S_CUR: begin
          if (idx >= K) st <= S_DONE;
          else if (tuple_v[idx] && !locked[over_id[idx]] && !locked[under_id[idx]]) begin
            u_over    <= over_t[idx];
            u_under   <= under_t[idx];
            ugt_load  <= !g1_set && idx == 0;
            if (!g1_set && idx == 0) g1_set <= 1'b1;
            ugt_start <= 1'b1;
            st        <= S_CUR_W;
          end else idx <= idx + 1;
        end

        S_CUR_W: if (ugt_done) begin
          int g, fs;
          logic [15:0] o, u;
          o  = over_id[idx];
          u  = under_id[idx];
          g  = int'(o) / GROUP;
          fs = free_slot(trk_v);
          if (idx == 0 && ugt_evil && !profiling[g] && !evil_valid[g] && int'(o) != g * GROUP) begin
            // gap too large for switching: profile the over-loaded PE on the Super-PE
            profiling[g]       <= 1'b1;
            prof_pe[g]         <= o;
            partner[o]         <= 16'(g * GROUP);
            partner[g * GROUP] <= o;
            nsw[o]             <= 16'(ROWS);
            nsw[g * GROUP]     <= 16'(ROWS);
            locked[o]          <= 1'b1;
            n_profile          <= n_profile + 1;
          end else if (ugt_delta > 0 && fs >= 0) begin
            partner[o] <= u;
            partner[u] <= o;
            nsw[o]     <= 16'(ugt_delta);
            nsw[u]     <= 16'(ugt_delta);
            locked[o]  <= 1'b1;
            locked[u]  <= 1'b1;
            trk_v[fs]     <= 1'b1;
            trk_over[fs]  <= o;
            trk_under[fs] <= u;
            trk_age[fs]   <= '0;
            n_switch <= n_switch + 1;
          end
          idx <= idx + 1;
          st  <= S_CUR;
        end

        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  initial assert (GROUP / LABOR >= 4 && NPE % GROUP == 0)
    else $error("wdc: need GROUP/LABOR >= 4 and NPE a multiple of GROUP");
endmodule
