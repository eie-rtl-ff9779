// tb_relu: checks y = max(x, 0) over every 16-bit input.
`timescale 1ns/1ps
module tb_relu;
  logic signed [15:0] x, y;
  int checks = 0, failures = 0;
  relu dut (.*);
  initial begin
    for (int v = -32768; v < 32768; v++) begin
      x = 16'(v);
      #1;
      checks++;
      if (int'(y) != ((v > 0) ? v : 0)) begin failures++; if (failures < 5) $display("FAIL %0d -> %0d", v, y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
