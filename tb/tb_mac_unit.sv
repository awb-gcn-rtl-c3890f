// tb_mac_unit: issues a random stream of multiply-accumulate operations with random
// gaps and checks each result (a*b + acc, against double-precision arithmetic on the
// same single-precision inputs), its tag, that it arrives exactly T cycles after issue,
// and that pipe_tags lists the tags in flight.
`timescale 1ns/1ps
module tb_mac_unit;
  import awb_pkg::*;
  localparam int T = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  fp32_t in_a = '0, in_b = '0, in_acc = '0, out_sum;
  tag_t in_tag = '0, out_tag, pipe_tags [T];
  mac_unit #(.T(T)) dut (.*);
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
  typedef struct { int cyc; real v; real mag; tag_t tag; } exp_t;
  exp_t q [$];
  // tolerance scaled by the operand magnitudes, since a*b + acc may cancel
  function automatic bit close(input real g, input real e, input real mag);
    real tol;
    tol = 1e-5 * mag + 1e-6;
    return (g - e <= tol) && (e - g <= tol);
  endfunction
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      real a, b, c;
      @(negedge clk);
      // check outputs of this cycle
      if (q.size() > 0 && q[0].cyc == cyc) begin
        checks++;
        if (!out_valid || out_tag != q[0].tag || !close(to_real(out_sum), q[0].v, q[0].mag)) begin
          failures++;
          if (failures < 10) $display("FAIL %0d: v=%0d got %f exp %f", cyc, out_valid, to_real(out_sum), q[0].v);
        end
        void'(q.pop_front());
      end else begin
        checks++;
        if (out_valid) failures++;
      end
      // in-flight tags: every queued expectation must appear in pipe_tags
      foreach (q[k]) begin
        bit seen;
        seen = 0;
        for (int j = 0; j < T; j++) if (pipe_tags[j] == q[k].tag) seen = 1;
        checks++;
        if (!seen) failures++;
      end
      in_valid = ($urandom % 3) != 0;
      a = to_real(to_fp32((real'($urandom % 20000) - 10000.0) / 1000.0));
      b = to_real(to_fp32((real'($urandom % 20000) - 10000.0) / 1000.0));
      c = to_real(to_fp32((real'($urandom % 20000) - 10000.0) / 100.0));
      in_a = to_fp32(a); in_b = to_fp32(b); in_acc = to_fp32(c);
      in_tag = '{v: 1'b1, bank: 16'(i), slot: 16'($urandom)};
      if (in_valid) q.push_back('{cyc: cyc + T, v: a * b + c, mag: (a * b < 0 ? -a * b : a * b) + (c < 0 ? -c : c), tag: in_tag});
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
