// shuffle_switch: the Shuffle Switches (SS) that apply remote switching and evil-row
// remapping to the non-zeros entering the Omega network.
//
// A row i is statically owned by PE i / ROWS at slot i % ROWS. Remote switching
// exchanges workload between a PE pair (p, q): the first nsw(p) slots of p are handled
// by q and the same slots of q by p. The paper describes the switch only as moving
// "the destination PE of these rows"; exchanging slot for slot is this design's choice,
// because it lets the partner hold the moved rows in the same slots of its own bank.
// The Workload Distribution Controller supplies, per PE, the partner and the number of
// switched slots; the switch looks up the owner of each non-zero's row and rewrites the
// destination.
//
// Evil-row remapping: for each of the NG Super-PE groups whose evil_valid is set, the
// non-zeros of that group's evil_row are spread over its LABOR Labor-PEs (labor_id) (lane l of the cycle goes to Labor-PE
// (l + rr) mod LABOR, rr advancing every cycle), and are marked with slot = ROWS, the
// extra slot of a bank that holds a Labor-PE's share of the evil row.
//
// One instance serves all LANES lanes of a cycle; it is combinational apart from the
// rotating pointer. The lane spreading is this design's choice.
module shuffle_switch
  import awb_pkg::*;
#(
  parameter int NPE   = 1024,
  parameter int ROWS  = 16,
  parameter int LANES = 1024,
  parameter int LABOR = 4,
  parameter int NG    = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [LANES-1:0] in_valid,
  input  logic [31:0] in_row [LANES],
  input  fp32_t       in_a   [LANES],
  input  fp32_t       in_b   [LANES],
  input  logic [LANES-1:0] in_take,     // lanes accepted downstream this cycle
  output task_t       out_task [LANES],
  // switch table from the WDC
  input  logic [15:0] partner [NPE],
  input  logic [15:0] nsw     [NPE],
  input  logic [NG-1:0] evil_valid,
  input  logic [31:0] evil_row [NG],
  input  logic [15:0] labor_id [NG][LABOR],
  output logic [15:0] evil_hits            // evil-row non-zeros accepted this cycle
);
  localparam int RB = $clog2(ROWS);
  localparam int LB = (LABOR > 1) ? $clog2(LABOR) : 1;

  logic [LB-1:0] rr;   // rotates the lane-to-Labor-PE assignment every cycle

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [15:0] own, sl;
      own = 16'(in_row[l] >> RB);
      sl  = 16'(in_row[l] & (ROWS - 1));
      out_task[l].a    = in_a[l];
      out_task[l].b    = in_b[l];
      out_task[l].slot = sl;
      out_task[l].pe   = (sl < nsw[own]) ? partner[own] : own;
      for (int g = 0; g < NG; g++)
        if (evil_valid[g] && in_row[l] == evil_row[g]) begin
          out_task[l].pe   = labor_id[g][(l + 32'(rr)) % LABOR];
          out_task[l].slot = 16'(ROWS);
        end
    end
  end

  always_comb begin
    evil_hits = '0;
    for (int l = 0; l < LANES; l++)
      for (int g = 0; g < NG; g++)
        if (evil_valid[g] && in_row[l] == evil_row[g] && in_valid[l] && in_take[l])
          evil_hits = evil_hits + 16'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else        rr <= (32'(rr) == LABOR - 1) ? '0 : rr + 1'b1;
  end
endmodule
