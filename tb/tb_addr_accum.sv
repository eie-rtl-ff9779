// tb_addr_accum: replays the relative row indices of the paper's worked
// example (PE0's slice of a 16x8 matrix over 4 PEs: indices 0 1 0 | 1 | 0 2 |
// | 0 0 | 0 2 | 0 | 2 0 with column pointers 0 3 4 6 6 8 10 11 13) and checks
// the local rows 0 2 3 | 1 | 0 3 | | 0 1 | 0 3 | 0 | 2 3, then random columns
// against a running-sum model.
`timescale 1ns/1ps
module tb_addr_accum;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [3:0] rel = '0;
  logic [15:0] addr;
  int checks = 0, failures = 0;

  int ex_rel [13] = '{0, 1, 0, 1, 0, 2, 0, 0, 0, 2, 0, 2, 0};
  int ex_ptr [9]  = '{0, 3, 4, 6, 6, 8, 10, 11, 13};
  int ex_row [13] = '{0, 2, 3, 1, 0, 3, 0, 1, 0, 3, 0, 2, 3};

  always #5 clk = ~clk;
  addr_accum dut (.*);

  task automatic chk(string what, int got, int exp);
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
    int row;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < 8; j++)
      for (int p = ex_ptr[j]; p < ex_ptr[j + 1]; p++) begin
        @(negedge clk);
        en = 1; first = (p == ex_ptr[j]); rel = 4'(ex_rel[p]);
        #1 chk("paper example", int'(addr), ex_row[p]);
      end
    // random columns, with idle cycles between entries
    for (int c = 0; c < 300; c++) begin
      row = -1;
      for (int e = 0; e < int'($urandom_range(1, 12)); e++) begin
        @(negedge clk);
        en = 0;
        if ($urandom_range(0, 3) == 0) @(negedge clk);
        en = 1; first = (e == 0); rel = 4'($urandom);
        row = row + int'(rel) + 1;
        #1 chk("random", int'(addr), row);
      end
    end
    @(negedge clk);
    en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
