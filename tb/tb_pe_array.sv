// tb_pe_array: 8 PEs, 4 rows each, 2-hop neighbour wiring. Each cycle random tasks are
// pushed into PEs whose owner bank is up to HOPS away (as distribution smoothing does),
// many aimed at the same rows so that the cross-PE RaW check matters. After the work
// drains, each slot is read out through the output port and every row is compared with
// the sum of its products; the banks must read zero after read-out.
`timescale 1ns/1ps
module tb_pe_array;
  import awb_pkg::*;
  localparam int NPE = 8, ROWS = 4, T = 4, HOPS = 2, TQ_DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NPE-1:0] push = '0, tq_full, tq_empty, idle, stall;
  task_t push_data [NPE];
  logic [$clog2(TQ_DEPTH+1)-1:0] tq_count [NPE];
  logic out_en = 0;
  logic [15:0] out_slot = 0;
  fp32_t out_data [NPE];
  pe_array #(.NPE(NPE), .ROWS(ROWS), .T(T), .HOPS(HOPS), .TQ_DEPTH(TQ_DEPTH)) dut (.*);
  int checks = 0, failures = 0, stalls = 0;
  real expv [NPE][ROWS];
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
  always @(posedge clk) stalls <= stalls + $countones(stall);
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  task automatic readout(input bit expect_zero);
    for (int s = 0; s < ROWS; s++) begin
      @(negedge clk);
      out_en = 1; out_slot = s;
      #1;
      for (int p = 0; p < NPE; p++) begin
        real g, e, tol;
        g = to_real(out_data[p]); e = expect_zero ? 0.0 : expv[p][s];
        tol = 1e-4 * (e < 0 ? -e : e) + 1e-3;
        chk((g - e <= tol) && (e - g <= tol), $sformatf("pe %0d slot %0d got %f exp %f", p, s, g, e));
      end
    end
    @(negedge clk);
    out_en = 0;
  endtask
  initial begin
    for (int p = 0; p < NPE; p++) begin push_data[p] = '0; for (int s = 0; s < ROWS; s++) expv[p][s] = 0.0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 1500; it++) begin
      @(negedge clk);
      for (int p = 0; p < NPE; p++) begin
        push[p] = !tq_full[p] && ($urandom % 2);
        if (push[p]) begin
          int b, s;
          real a, bb;
          b = p + int'($urandom % (2*HOPS+1)) - HOPS;
          if (b < 0) b = 0;
          if (b >= NPE) b = NPE - 1;
          s = $urandom % 2;
          a  = to_real(to_fp32(real'($urandom % 2000) / 1000.0));
          bb = to_real(to_fp32(real'($urandom % 2000) / 1000.0 - 1.0));
          push_data[p] = '{pe: 16'(b), slot: 16'(s), a: to_fp32(a), b: to_fp32(bb)};
          expv[b][s] += a * bb;
        end
      end
    end
    @(negedge clk);
    push = '0;
    while (idle != '1) @(negedge clk);
    readout(0);
    readout(1);
    chk(stalls > 0, "no RaW stall");
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
