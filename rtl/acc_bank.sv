// acc_bank: one bank of the accumulation buffer (ACC Buffer) array.
//
// Holds the partial results of the ROWS rows (plus one evil-row slot, see below) of the current output column that are
// mapped to one PE (the paper: "each PE is coupled with a bank of ACC buffer to store
// the rows of C it accounts for"). With distribution smoothing, the PEs up to HOPS
// positions away also accumulate into this bank, so it has NP = 2*HOPS+1 read/write
// ports, port j serving the PE at offset j-HOPS. The RaW check units guarantee that
// two ports never write the same slot in one cycle. A further port reads a slot out
// and clears it when a column is complete, so the bank starts the next column at zero.
// Read ports are asynchronous (register-file style); writes take effect at the clock
// edge. The register-file organisation and the clear-on-read are this design's choices.
module acc_bank
  import awb_pkg::*;
#(
  parameter int ROWS = 16,
  parameter int HOPS = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] rd_slot [2*HOPS+1],
  output fp32_t       rd_data [2*HOPS+1],
  input  logic        wr_en   [2*HOPS+1],
  input  logic [15:0] wr_slot [2*HOPS+1],
  input  fp32_t       wr_data [2*HOPS+1],
  input  logic        out_en,
  input  logic [15:0] out_slot,
  output fp32_t       out_data
);
  localparam int NP = 2*HOPS + 1;
  localparam int SW = $clog2(ROWS + 1);

  // Slots 0..ROWS-1 hold the bank's rows; slot ROWS holds this PE's share of an evil
  // row when the PE serves as a Labor-PE (otherwise it stays zero).
  fp32_t mem [ROWS + 1];

  always_comb begin
    for (int j = 0; j < NP; j++) rd_data[j] = mem[SW'(rd_slot[j])];
    out_data = mem[SW'(out_slot)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r <= ROWS; r++) mem[r] <= '0;
    end else begin
      for (int j = 0; j < NP; j++)
        if (wr_en[j]) mem[SW'(wr_slot[j])] <= wr_data[j];
      if (out_en) mem[SW'(out_slot)] <= '0;
    end
  end

  // Two ports writing one slot in one cycle would lose an update.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < NP; i++)
        for (int j = i + 1; j < NP; j++)
          assert (!(wr_en[i] && wr_en[j] && wr_slot[i] == wr_slot[j]))
            else $error("acc_bank: two writes to slot %0d", wr_slot[i]);
    end
  end
endmodule
