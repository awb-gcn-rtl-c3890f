// tb_evil_row_acc: gives the adder tree random partial sums of the Labor-PEs and
// checks the captured total against double-precision addition, and that sum_q holds
// its value while capture is low.
`timescale 1ns/1ps
module tb_evil_row_acc;
  import awb_pkg::*;
  localparam int LABOR = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic capture = 0;
  fp32_t part [LABOR], sum_q;
  evil_row_acc #(.LABOR(LABOR)) dut (.*);
  int checks = 0, failures = 0;
  function automatic fp32_t to_fp32(input real r);
    logic [63:0] d;
    int e;
    d = $realtobits(r);
    if (r == 0.0) return '0;
    e = int'(d[62:52]) - 1023 + 127;
    return {d[63], e[7:0], d[51:29]};
  endfunction
  function automatic real to_real(input fp32_t f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction
  function automatic bit near(input real g, input real e);
    real tol;
    tol = 1e-5 * (e < 0 ? -e : e) + 1e-6;
    return (g - e <= tol) && (e - g <= tol);
  endfunction
  initial begin
    real e;
    fp32_t held;
    for (int l = 0; l < LABOR; l++) part[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      e = 0.0;
      for (int l = 0; l < LABOR; l++) begin
        real v;
        v = to_real(to_fp32((real'($urandom % 20000)) / 100.0));
        part[l] = to_fp32(v);
        e += v;
      end
      capture = 1;
      @(negedge clk);
      capture = 0;
      checks++;
      if (!near(to_real(sum_q), e)) begin
        failures++;
        if (failures < 10) $display("FAIL got %f exp %f", to_real(sum_q), e);
      end
      held = sum_q;
      for (int l = 0; l < LABOR; l++) part[l] = $urandom;
      @(negedge clk);
      checks++;
      if (sum_q != held) failures++;
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
