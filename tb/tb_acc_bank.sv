// tb_acc_bank: random writes through all 2*HOPS+1 ports (to distinct slots in a cycle,
// as the RaW check guarantees) with a model of the contents; checks every port's read
// data, and that the read-out port returns a slot and clears it.
`timescale 1ns/1ps
module tb_acc_bank;
  import awb_pkg::*;
  localparam int ROWS = 8, HOPS = 2, NP = 2*HOPS+1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [15:0] rd_slot [NP], wr_slot [NP];
  fp32_t rd_data [NP], wr_data [NP], out_data;
  logic wr_en [NP];
  logic out_en = 0;
  logic [15:0] out_slot = 0;
  acc_bank #(.ROWS(ROWS), .HOPS(HOPS)) dut (.*);
  int checks = 0, failures = 0;
  fp32_t m [ROWS+1];
  initial begin
    for (int j = 0; j < NP; j++) begin rd_slot[j] = 0; wr_slot[j] = 0; wr_en[j] = 0; wr_data[j] = '0; end
    for (int s = 0; s <= ROWS; s++) m[s] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      bit used [ROWS+1];
      @(negedge clk);
      for (int j = 0; j < NP; j++) rd_slot[j] = $urandom % (ROWS + 1);
      out_slot = $urandom % (ROWS + 1);
      #1;
      for (int j = 0; j < NP; j++) begin
        checks++;
        if (rd_data[j] != m[rd_slot[j]]) failures++;
      end
      checks++;
      if (out_data != m[out_slot]) failures++;
      for (int s = 0; s <= ROWS; s++) used[s] = 0;
      out_en = ($urandom % 8) == 0;
      if (out_en) used[out_slot] = 1;
      for (int j = 0; j < NP; j++) begin
        wr_slot[j] = $urandom % (ROWS + 1);
        wr_en[j]   = ($urandom % 2) && !used[wr_slot[j]];
        wr_data[j] = $urandom;
        if (wr_en[j]) used[wr_slot[j]] = 1;
      end
      @(posedge clk);
      if (out_en) m[out_slot] = '0;
      for (int j = 0; j < NP; j++) if (wr_en[j]) m[wr_slot[j]] = wr_data[j];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
