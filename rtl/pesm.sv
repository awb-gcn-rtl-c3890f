// pesm: the PE Status Monitor of the autotuner, with its Switch Candidate Buffer and
// arbiter.
//
// Follows the paper's description: every cycle the PE done (empty) signals are XORed
// with their values of the previous cycle; the PEs that have newly become idle are
// set in the Switch Candidate Buffer (a bit per PE). Once the sparse matrix has been
// sent (scan_en), an arbiter takes one candidate per cycle, lowest index first, and
// records its id with the cycle count since the round started. It never takes two
// neighbouring PEs one after the other (a neighbour of the last pick is dropped), so
// the tuples come from different crests and troughs. The first K picks are the most
// under-loaded PEs. Later picks go into a window of the last K picks; when the
// completion signal (the AND of all done signals, given by the engine) arrives the arbiter drains the buffer,
// and the window then holds the K most over-loaded PEs. Tuple k pairs the k-th
// earliest finisher with the k-th latest.
//
// Simplifications of this design: a PE that gets work again is removed from the
// buffer; the time recorded is the cycle of the pick, so a PE picked while others are
// still queued gets a slightly late time; PEs in exclude (already switched, or
// Super-PEs) are never picked.
//
// The monitor also watches NW given PE ids (the previous rounds' tuples, whose
// post-switching gap the UGT tracks) and reports the cycle each of them last became
// idle: the paper's "Previous Round PE Tuples Copy" with its AND gates.
//
// Interface: round_start clears everything; ready rises after completion once the
// buffer is drained and stays high until the next round_start.
module pesm #(
  parameter int NPE = 1024,
  parameter int K   = 4,
  parameter int NW  = 16,
  parameter int TW  = 24
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           round_start,
  input  logic           scan_en,
  input  logic [NPE-1:0] done_in,
  input  logic           complete,
  input  logic [NPE-1:0] exclude,
  output logic           ready,
  output logic [15:0]    under_id [K],
  output logic [TW-1:0]  under_t  [K],
  output logic [15:0]    over_id  [K],
  output logic [TW-1:0]  over_t   [K],
  output logic [K-1:0]   tuple_v,
  input  logic [15:0]    watch_id [NW],
  output logic [TW-1:0]  watch_t  [NW]
);
  logic [NPE-1:0] prev, cand;
  logic [TW-1:0]  now;
  logic           running;
  logic [15:0]    last_id;
  logic           last_v;
  int unsigned    n_under;
  logic [15:0]    win_id [K];
  logic [TW-1:0]  win_t  [K];
  int unsigned    n_win;

  // Arbiter: lowest-index candidate that is not excluded and not next to the last pick.
  logic [NPE-1:0] elig;
  logic           pick_v;
  logic [15:0]    pick_id;
  always_comb begin
    elig = cand & ~exclude;
    if (last_v) begin
      if (32'(last_id) > 0)       elig[last_id - 16'd1] = 1'b0;
      if (32'(last_id) < NPE - 1) elig[last_id + 16'd1] = 1'b0;
    end
    pick_v  = 1'b0;
    pick_id = '0;
    for (int i = NPE - 1; i >= 0; i--)
      if (elig[i]) begin
        pick_v  = 1'b1;
        pick_id = 16'(i);
      end
  end

  function automatic logic in_under(input logic [15:0] id, input logic [15:0] ids [K],
                                    input int unsigned n);
    for (int i = 0; i < K; i++) if (i < int'(n) && ids[i] == id) return 1'b1;
    return 1'b0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev <= '0; cand <= '0; now <= '0; running <= 1'b0; ready <= 1'b0;
      last_id <= '0; last_v <= 1'b0; n_under <= 0; n_win <= 0;
      for (int i = 0; i < K; i++) begin
        under_id[i] <= '0; under_t[i] <= '0; win_id[i] <= '0; win_t[i] <= '0;
      end
      for (int i = 0; i < NW; i++) watch_t[i] <= '0;
    end else if (round_start) begin
      prev <= '0; cand <= '0; now <= '0; running <= 1'b1; ready <= 1'b0;
      last_v <= 1'b0; n_under <= 0; n_win <= 0;
      for (int i = 0; i < NW; i++) watch_t[i] <= '0;
    end else if (running) begin
      logic [NPE-1:0] rise, c;
      now  <= now + 1'b1;
      prev <= done_in;
      rise = (done_in ^ prev) & done_in;         // XOR with the previous cycle
      c    = (cand | rise) & done_in;
      for (int i = 0; i < NW; i++)
        if (32'(watch_id[i]) < NPE && rise[watch_id[i]]) watch_t[i] <= now;
      if (scan_en && pick_v) begin
        c[pick_id] = 1'b0;
        if (32'(pick_id) > 0)       c[pick_id - 16'd1] = 1'b0;
        if (32'(pick_id) < NPE - 1) c[pick_id + 16'd1] = 1'b0;
        last_id <= pick_id;
        last_v  <= 1'b1;
        if (n_under < K) begin
          under_id[n_under] <= pick_id;
          under_t[n_under]  <= now;
          n_under <= n_under + 1;
        end else if (!in_under(pick_id, under_id, n_under)) begin
          // sliding window of the most recent picks, newest at index 0
          win_id[0] <= pick_id;
          win_t[0]  <= now;
          for (int i = 1; i < K; i++) begin
            win_id[i] <= win_id[i-1];
            win_t[i]  <= win_t[i-1];
          end
          if (n_win < K) n_win <= n_win + 1;
        end
      end
      cand <= c;
      if (scan_en && complete && !pick_v && (rise & ~exclude) == '0) begin
        running <= 1'b0;
        ready   <= 1'b1;
      end
    end
  end

  always_comb begin
    for (int k = 0; k < K; k++) begin
      over_id[k] = win_id[k];
      over_t[k]  = win_t[k];
      tuple_v[k] = (k < int'(n_under)) && (k < int'(n_win));
    end
  end
endmodule
