// tb_dcm: writes a column of random values into the dense-column memory and reads
// them back on every lane at random addresses, comparing with a copy kept here.
`timescale 1ns/1ps
module tb_dcm;
  import awb_pkg::*;
  localparam int DEPTH = 64, LANES = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [31:0] wr_addr = 0;
  fp32_t wr_data = '0;
  logic [31:0] rd_addr [LANES];
  fp32_t rd_data [LANES];
  dcm #(.DEPTH(DEPTH), .LANES(LANES)) dut (.*);
  int checks = 0, failures = 0;
  fp32_t ref_m [DEPTH];
  initial begin
    for (int l = 0; l < LANES; l++) rd_addr[l] = 0;
    for (int r = 0; r < 2; r++) begin
      for (int i = 0; i < DEPTH; i++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = i; wr_data = $urandom; ref_m[i] = wr_data;
      end
      @(negedge clk);
      wr_en = 0;
      for (int k = 0; k < 50; k++) begin
        for (int l = 0; l < LANES; l++) rd_addr[l] = $urandom % DEPTH;
        #1;
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (rd_data[l] !== ref_m[rd_addr[l]]) failures++;
        end
        @(negedge clk);
      end
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
