// tb_act_rw: self-checking test of the activation read/write unit.
// Checks DMA writes and reads of both register files and of the activation
// SRAM, the one-cycle clear of the destination file, the role swap, the
// accumulator port, and the 64-word batch copies between SRAM and register
// files including their 65-cycle duration. Expected values come from shadow
// arrays kept by the testbench.
`timescale 1ns/1ps
module tb_act_rw;
  import eie_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear_dst = 0, swap = 0, load_src = 0, store_dst = 0;
  logic [9:0] sram_base = '0;
  logic busy;
  data_t src_vec [REGS];
  logic [REG_AW-1:0] dst_raddr = '0, dst_waddr = '0;
  data_t dst_rdata, dst_wdata = '0;
  logic dst_we = 0;
  logic dma_we = 0, dma_re = 0;
  dma_target_e dma_target = T_SRC;
  logic [9:0] dma_addr = '0;
  data_t dma_wdata = '0, dma_rdata;

  int checks = 0, failures = 0;
  int shadow_sram [1024];
  int shadow_a [64], shadow_b [64];

  always #5 clk = ~clk;

  act_rw dut (.*);

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic wr(dma_target_e t, int a, int v);
    @(negedge clk);
    dma_we = 1; dma_target = t; dma_addr = 10'(a); dma_wdata = 16'(v);
    @(negedge clk);
    dma_we = 0;
  endtask

  task automatic rd(dma_target_e t, int a, output int v);
    @(negedge clk);
    dma_re = 1; dma_target = t; dma_addr = 10'(a);
    @(negedge clk);
    dma_re = 0;
    v = int'(dma_rdata);
  endtask

  task automatic pulse(ref logic s);
    @(negedge clk);
    s = 1;
    @(negedge clk);
    s = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // file 0 is the source after reset
    for (int i = 0; i < 64; i++) begin
      shadow_a[i] = int'($urandom_range(0, 65535)) - 32768;
      shadow_b[i] = int'($urandom_range(0, 65535)) - 32768;
      wr(T_SRC, i, shadow_a[i]);
      wr(T_DST, i, shadow_b[i]);
    end
    for (int i = 0; i < 64; i++) begin
      chk("src_vec", int'(src_vec[i]), shadow_a[i]);
      rd(T_DST, i, v); chk("dma dst", int'($signed(16'(v))), shadow_b[i]);
      rd(T_SRC, i, v); chk("dma src", int'($signed(16'(v))), shadow_a[i]);
    end
    // accumulator port
    @(negedge clk);
    dst_raddr = 6'd5;
    #1 chk("dst_rdata", int'(dst_rdata), shadow_b[5]);
    dst_we = 1; dst_waddr = 6'd7; dst_wdata = 16'sd1234;
    @(negedge clk);
    dst_we = 0; shadow_b[7] = 1234;
    dst_raddr = 6'd7;
    #1 chk("dst write", int'(dst_rdata), 1234);
    // swap: roles exchange
    pulse(swap);
    for (int i = 0; i < 64; i++) chk("swapped src", int'(src_vec[i]), shadow_b[i]);
    // clear destination (now file 0)
    pulse(clear_dst);
    for (int i = 0; i < 64; i++) begin rd(T_DST, i, v); chk("cleared", v, 0); end
    for (int i = 0; i < 64; i++) chk("src kept", int'(src_vec[i]), shadow_b[i]);
    // SRAM contents
    for (int a = 0; a < 256; a++) begin
      shadow_sram[a] = int'($urandom_range(0, 65535)) - 32768;
      wr(T_SRAM, a, shadow_sram[a]);
    end
    for (int a = 0; a < 256; a += 7) begin rd(T_SRAM, a, v); chk("sram", int'($signed(16'(v))), shadow_sram[a]); end
    // load source file from SRAM[64 +: 64]
    sram_base = 10'd64;
    pulse(load_src);
    n = 0;
    while (busy) begin @(negedge clk); n++; end
    chk("load duration", n, 65);
    for (int i = 0; i < 64; i++) chk("loaded src", int'(src_vec[i]), shadow_sram[64 + i]);
    // store destination (file 0, cleared) after writing some values
    for (int i = 0; i < 64; i += 3) wr(T_DST, i, i * 11 - 300);
    sram_base = 10'd512;
    pulse(store_dst);
    n = 0;
    while (busy) begin @(negedge clk); n++; end
    chk("store duration", n, 65);
    for (int i = 0; i < 64; i++) begin
      rd(T_SRAM, 512 + i, v);
      chk("stored", int'($signed(16'(v))), (i % 3 == 0) ? i * 11 - 300 : 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
