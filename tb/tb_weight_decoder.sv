// tb_weight_decoder: loads random codebooks and checks every look-up against
// the table written, including that code 0 always yields weight 0.
`timescale 1ns/1ps
module tb_weight_decoder;
  import eie_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [3:0] wr_idx = '0, idx = '0;
  data_t wr_data = '0, weight;
  int table_m [16];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  weight_decoder dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      for (int c = 0; c < 16; c++) begin
        @(negedge clk);
        wr_en = 1; wr_idx = 4'(c); wr_data = data_t'($urandom);
        table_m[c] = (c == 0) ? 0 : int'(wr_data);
      end
      @(negedge clk);
      wr_en = 0;
      for (int n = 0; n < 64; n++) begin
        idx = 4'($urandom);
        #1;
        checks++;
        if (int'(weight) != table_m[idx]) begin
          failures++;
          $display("FAIL code %0d: %0d vs %0d", idx, weight, table_m[idx]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
