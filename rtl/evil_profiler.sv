// evil_profiler: the two extra modules of a Super-PE that find its evil row.
//
// While the workload of an over-loaded PE is switched onto the Super-PE, every
// non-zero arriving for the Super-PE is counted per row (the paper's "non-zero counter
// (including a local buffer) that records the number of non-zeros per row"), and the
// row with the most non-zeros is tracked (the paper's "parallel sorting circuit that
// tracks the rows with the most non-zeros"). Only the top row is needed, because one
// evil row per Super-PE is remapped; the sorter therefore reduces to a running maximum
// that is updated with each count. That reduction is this design's choice.
//
// Interface: clear zeroes the counters; in_valid/in_slot count one non-zero for a slot
// (slots >= ROWS are ignored). max_slot/max_count are valid one cycle after an update.
module evil_profiler #(
  parameter int ROWS = 16,
  parameter int CW   = 24
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  input  logic [15:0]   in_slot,
  output logic [15:0]   max_slot,
  output logic [CW-1:0] max_count
);
  logic [CW-1:0] cnt [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) cnt[r] <= '0;
      max_slot <= '0; max_count <= '0;
    end else if (clear) begin
      for (int r = 0; r < ROWS; r++) cnt[r] <= '0;
      max_slot <= '0; max_count <= '0;
    end else if (in_valid && 32'(in_slot) < ROWS) begin
      logic [CW-1:0] c;
      c = cnt[in_slot] + 1'b1;
      cnt[in_slot] <= c;
      if (c > max_count) begin
        max_count <= c;
        max_slot  <= in_slot;
      end
    end
  end
endmodule
