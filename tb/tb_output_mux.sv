// tb_output_mux: random bank contents, a random Distribution Switch Table made of
// disjoint PE pairs, and random evil rows; checks every output lane against the rule
// "slot below the switched count reads the partner's bank, an evil row reads its
// adder-tree total, ReLU zeroes negatives" worked out here.
`timescale 1ns/1ps
module tb_output_mux;
  import awb_pkg::*;
  localparam int NPE = 16, ROWS = 4, NG = 2;
  logic [15:0] slot;
  fp32_t bank_data [NPE], evil_sum [NG], out_data [NPE];
  logic [15:0] partner [NPE], nsw [NPE];
  logic [NG-1:0] evil_valid;
  logic [31:0] evil_row [NG];
  logic relu_en;
  output_mux #(.NPE(NPE), .ROWS(ROWS), .NG(NG)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int it = 0; it < 500; it++) begin
      for (int p = 0; p < NPE; p++) begin partner[p] = p; nsw[p] = 0; bank_data[p] = $urandom; end
      for (int k = 0; k < 3; k++) begin
        int a, b;
        a = $urandom % NPE; b = $urandom % NPE;
        if (a != b && partner[a] == a && partner[b] == b) begin
          partner[a] = b; partner[b] = a;
          nsw[a] = $urandom % (ROWS + 1); nsw[b] = nsw[a];
        end
      end
      for (int g = 0; g < NG; g++) begin
        evil_valid[g] = $urandom % 2;
        evil_row[g]   = $urandom % (NPE * ROWS);
        evil_sum[g]   = $urandom;
      end
      slot = $urandom % ROWS;
      relu_en = $urandom % 2;
      #1;
      for (int p = 0; p < NPE; p++) begin
        fp32_t e;
        e = (slot < nsw[p]) ? bank_data[partner[p]] : bank_data[p];
        for (int g = 0; g < NG; g++)
          if (evil_valid[g] && evil_row[g] == p * ROWS + slot) e = evil_sum[g];
        if (relu_en && e[31]) e = '0;
        checks++;
        if (out_data[p] != e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
