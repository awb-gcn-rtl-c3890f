// ugt: the Utilization Gap Tracker's arithmetic: threshold-based counting and the
// Table for Switch Fraction Lookup (TfSFL).
//
// The paper approximates N = G_i / G_1 * (R/2), the number of rows to switch, without
// a divider: the first round's gap G_1 shifted right by g bits is a threshold; a
// counter counts the current gap in units of that threshold (q), and q addresses a
// table holding the number of rows. Here the counting runs after the round on the
// recorded times: each cycle subtracts the threshold once and increments q, so it ends
// after q+1 cycles (q is capped at QMAX, the table size minus one). The paper leaves
// the table contents out; this design fills entry q with min(R, (q * R/2) >> g), i.e.
// the equation itself, computed at elaboration.
//
// The gap is signed: a tracked tuple whose over-loaded PE now finishes first gives a
// negative gap and a negative row delta (Equation 3's update then shrinks the switch).
// Comparator for evil rows (the figure's "<" box fed by the two execution times, the
// over-loaded one shifted by beta): evil is set when over_t >> BETA > under_t.
//
// Interface: load_g1 latches G_1 = gap; start begins a lookup; done pulses with
// delta_rows and evil valid.
module ugt #(
  parameter int TW   = 24,
  parameter int ROWS = 16,
  parameter int G    = 3,
  parameter int BETA = 2,
  parameter int QMAX = 2**(G+1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load_g1,
  input  logic                  start,
  input  logic [TW-1:0]         over_t,
  input  logic [TW-1:0]         under_t,
  output logic                  busy,
  output logic                  done,
  output logic signed [16:0]    delta_rows,
  output logic                  evil,
  output logic [TW-1:0]         g1
);
  // TfSFL
  function automatic logic [15:0] tfsfl_entry(input int q);
    int v;
    v = (q * (ROWS / 2)) >> G;
    return 16'((v > ROWS) ? ROWS : v);
  endfunction
  logic [15:0] tfsfl [QMAX+1];
  always_comb for (int q = 0; q <= QMAX; q++) tfsfl[q] = tfsfl_entry(q);

  logic [TW-1:0] thr, rem;
  logic          neg;
  int unsigned   q;

  assign thr = ((g1 >> G) == '0) ? TW'(1) : (g1 >> G);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g1 <= '0; busy <= 1'b0; done <= 1'b0; rem <= '0; neg <= 1'b0; q <= 0;
      delta_rows <= '0; evil <= 1'b0;
    end else begin
      done <= 1'b0;
      if (load_g1) g1 <= (over_t > under_t) ? over_t - under_t : '0;
      if (start && !busy) begin
        busy <= 1'b1;
        neg  <= over_t < under_t;
        rem  <= (over_t >= under_t) ? over_t - under_t : under_t - over_t;
        q    <= 0;
        evil <= (over_t >> BETA) > under_t;
      end else if (busy) begin
        if (rem >= thr && q < QMAX) begin       // left CNT reached the threshold
          rem <= rem - thr;
          q   <= q + 1;                          // right CNT
        end else begin
          busy       <= 1'b0;
          done       <= 1'b1;
          delta_rows <= neg ? -$signed({1'b0, tfsfl[q]}) : $signed({1'b0, tfsfl[q]});
        end
      end
    end
  end
endmodule
