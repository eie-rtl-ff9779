// tb_sram_sp: checks the single-ported SRAM model: data written is read back
// one cycle after the read, the output holds while the SRAM is idle or being
// written, and different words do not alias. A shadow array gives the
// expected values.
`timescale 1ns/1ps
module tb_sram_sp;
  localparam int W = 64, D = 256;
  logic clk = 0, en = 0, we = 0;
  logic [7:0] addr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] shadow [D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  sram_sp #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic chk(string what, logic [W-1:0] got, logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 8) $display("FAIL %s: %h vs %h", what, got, exp); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] held;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 8'(a); wdata = {$urandom, $urandom};
      shadow[a] = wdata;
    end
    for (int n = 0; n < 600; n++) begin
      int a;
      a = int'($urandom_range(0, D - 1));
      @(negedge clk);
      en = 1; we = 0; addr = 8'(a);
      @(negedge clk);
      chk("read", rdata, shadow[a]);
      held = rdata;
      // idle cycle and a write elsewhere: output holds
      en = 0;
      @(negedge clk);
      chk("hold idle", rdata, held);
      en = 1; we = 1; addr = 8'((a + 1) % D); wdata = {$urandom, $urandom};
      shadow[(a + 1) % D] = wdata;
      @(negedge clk);
      en = 0; we = 0;
      chk("hold write", rdata, held);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
