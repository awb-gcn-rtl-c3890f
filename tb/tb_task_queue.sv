// tb_task_queue: random push/pop traffic against a SystemVerilog queue model.
// Checks the head task, the pending-task counter, and the empty and full flags every
// cycle, and never pushes into a full queue or pops an empty one (the queue asserts
// on both). DEPTH is the default of 8.
`timescale 1ns/1ps
module tb_task_queue;
  import awb_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, pop = 0, full, empty;
  task_t push_data = '0, head_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  task_queue #(.DEPTH(DEPTH)) dut (.*);
  int checks = 0, failures = 0;
  task_t model [$];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      chk(int'(count) == model.size(), "count");
      chk(empty == (model.size() == 0), "empty");
      chk(full == (model.size() == DEPTH), "full");
      if (model.size() > 0) chk(head_data == model[0], "head");
      // bias phases: fill up, then drain
      push = !full && (($urandom % 100) < ((cyc / 200) % 2 ? 30 : 80));
      pop  = !empty && (($urandom % 100) < ((cyc / 200) % 2 ? 80 : 30));
      push_data = '{pe: 16'($urandom), slot: 16'($urandom), a: $urandom, b: $urandom};
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(push_data);
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
