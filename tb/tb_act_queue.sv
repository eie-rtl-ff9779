// tb_act_queue: random pushes and pops (including both in one cycle) against
// a queue model. Checks head data, empty and full flags, that full rises at
// exactly 8 entries (the paper's depth), and FIFO order.
`timescale 1ns/1ps
module tb_act_queue;
  import eie_pkg::*;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  nz_t din = '0, dout;
  nz_t model [$];
  int checks = 0, failures = 0, max_fill = 0;

  always #5 clk = ~clk;
  act_queue dut (.*);

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 8) $display("FAIL %s: %0d vs %0d", what, got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      chk("empty", empty, model.size() == 0);
      chk("full", full, model.size() == 8);
      if (model.size() > 0) chk("head", dout, model[0]);
      // phases: fill up, drain, mixed
      push = !full && ($urandom_range(0, 99) < ((n / 500) % 2 ? 30 : 80));
      pop  = !empty && ($urandom_range(0, 99) < ((n / 500) % 2 ? 80 : 30));
      din.value = data_t'($urandom);
      din.index = 16'($urandom);
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
      if (model.size() > max_fill) max_fill = model.size();
      #1 push = 0; pop = 0;
    end
    chk("queue reached depth 8", max_fill, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
