// evil_row_acc: the adder tree of the Labor-PEs and the Evil Row ACC Buffer.
//
// A remapped evil row is accumulated in pieces, one per Labor-PE (slot ROWS of each
// Labor-PE's bank). When the column is read out the pieces are summed by an adder tree
// (the paper: Labor-PEs "are connected to an adder tree for result aggregation. The
// aggregated results of evil rows are cached in a small separate ACC buffer"). The
// tree is built from awb_pkg::fp32_add, LABOR inputs (a power of two), and its result
// is registered in the evil-row ACC buffer on capture.
//
// Timing: the tree is combinational; the buffer updates on the clock edge of capture.
module evil_row_acc
  import awb_pkg::*;
#(
  parameter int LABOR = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  capture,
  input  fp32_t part [LABOR],
  output fp32_t sum_q
);
  localparam int LV = $clog2(LABOR);
  fp32_t lvl [LV+1][LABOR];

  always_comb begin
    for (int i = 0; i < LABOR; i++) lvl[0][i] = part[i];
    for (int l = 1; l <= LV; l++)
      for (int i = 0; i < LABOR; i++)
        lvl[l][i] = (i < (LABOR >> l)) ? fp32_add(lvl[l-1][2*i], lvl[l-1][2*i+1]) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       sum_q <= '0;
    else if (capture) sum_q <= lvl[LV][0];
  end

  initial assert (LABOR == 2**LV) else $error("LABOR must be a power of two");
endmodule
