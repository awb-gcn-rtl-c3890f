// dcm: the dense-column memory (DCM).
//
// Buffers one column k of the dense matrix B (the paper: "DCM buffers the input dense
// matrix B and broadcasts its elements to TDQ"; with intra-layer pipelining only "a
// single column of XW" needs to be buffered). Element b(j,k) is paired with every
// non-zero of column j of S; here each stream lane looks up the element for the column
// index of its own non-zero, which is how the broadcast reaches the lanes. DEPTH is the
// number of rows of B (columns of S) one pass can hold; the paper gives no number.
//
// Interface: write port for loading the column (from the previous engine or off-chip);
// LANES asynchronous read ports.
module dcm
  import awb_pkg::*;
#(
  parameter int DEPTH = 16384,
  parameter int LANES = 1024
) (
  input  logic        clk,
  input  logic        wr_en,
  input  logic [31:0] wr_addr,
  input  fp32_t       wr_data,
  input  logic [31:0] rd_addr [LANES],
  output fp32_t       rd_data [LANES]
);
  localparam int AW = $clog2(DEPTH);
  fp32_t mem [DEPTH];

  always_ff @(posedge clk) if (wr_en) mem[AW'(wr_addr)] <= wr_data;

  always_comb
    for (int l = 0; l < LANES; l++) rd_data[l] = mem[AW'(rd_addr[l])];
endmodule
