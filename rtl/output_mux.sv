// output_mux: the read-out multiplexer from the ACC buffers to the next SpMM engine.
//
// When a column of the result is complete, slot l of every bank is read in one cycle
// and lane p of the output carries row p*ROWS + l, the row PE p owns under the static
// mapping. Remote switching may have moved that row into the same slot of the partner
// PE's bank, so lane p selects bank partner(p) when l < nsw(p) (the paper's "Mux" in
// front of "Next SPMM Engine"). A row remapped as an evil row is taken from the evil
// row ACC buffer of its Super-PE group instead. ReLU (the activation the paper applies
// to A(XW) before the next layer) is applied when relu_en is set: negative values
// become zero.
//
// Timing: combinational.
module output_mux
  import awb_pkg::*;
#(
  parameter int NPE  = 1024,
  parameter int ROWS = 16,
  parameter int NG   = 8
) (
  input  logic [15:0]   slot,
  input  fp32_t         bank_data [NPE],
  input  logic [15:0]   partner   [NPE],
  input  logic [15:0]   nsw       [NPE],
  input  logic [NG-1:0] evil_valid,
  input  logic [31:0]   evil_row  [NG],
  input  fp32_t         evil_sum  [NG],
  input  logic          relu_en,
  output fp32_t         out_data  [NPE]
);
  always_comb begin
    for (int p = 0; p < NPE; p++) begin
      fp32_t v;
      v = (slot < nsw[p]) ? bank_data[partner[p]] : bank_data[p];
      for (int g = 0; g < NG; g++)
        if (evil_valid[g] && evil_row[g] == 32'(p) * 32'(ROWS) + 32'(slot)) v = evil_sum[g];
      if (relu_en && v[31]) v = '0;
      out_data[p] = v;
    end
  end
endmodule
