// tb_ptr_read_unit: writes a pointer array into the two banks, then feeds
// random column indices (even and odd addresses, with a non-zero pointer
// base) through a modelled activation queue, with random back-pressure on the
// descriptor. Each descriptor must carry p[base+j], p[base+j+1] and the
// activation of its queue entry, in order, and appear one cycle after the
// SRAM read that follows the pop.
`timescale 1ns/1ps
module tb_ptr_read_unit;
  import eie_pkg::*;
  localparam int ENTRIES = 1024;
  logic clk = 0, rst_n = 0;
  logic q_empty;
  nz_t  q_head;
  logic q_pop;
  logic [PTR_W-1:0] ptr_base = '0;
  col_t col;
  logic col_valid, col_ready = 0, busy;
  logic dma_we = 0;
  logic [9:0] dma_addr = '0;
  logic [PTR_W-1:0] dma_wdata = '0;

  int ptrs [ENTRIES];
  nz_t q [$];
  nz_t expect_q [$];
  int checks = 0, failures = 0, n_cols = 0, n_odd = 0;
  logic pop_d = 0, pop_dd = 0;

  always #5 clk = ~clk;
  ptr_read_unit #(.PTR_ENTRIES(ENTRIES)) dut (.*);

  assign q_empty = (q.size() == 0);
  assign q_head  = q_empty ? '0 : q[0];

  always @(posedge clk) begin
    if (q_pop) begin
      expect_q.push_back(q[0]);
      void'(q.pop_front());
    end
  end
  always @(negedge clk) begin
    if (pop_dd) begin
      checks++;
      if (!col_valid) begin failures++; $display("FAIL descriptor not valid one cycle after the SRAM read"); end
    end
    pop_dd = pop_d;
    pop_d  = q_pop;
    if (col_valid && col_ready) begin
      nz_t e;
      int a;
      e = expect_q.pop_front();
      a = int'(ptr_base) + int'(e.index);
      if (a % 2) n_odd++;
      n_cols++;
      checks++;
      if (int'(col.start) != ptrs[a] || int'(col.stop) != ptrs[a + 1] || col.act != e.value) begin
        failures++;
        if (failures < 8) $display("FAIL j=%0d: %0d..%0d act %0d, expected %0d..%0d act %0d",
                                   e.index, col.start, col.stop, col.act, ptrs[a], ptrs[a + 1], e.value);
      end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    ptrs[0] = 0;
    for (int a = 0; a < ENTRIES; a++) begin
      if (a > 0) ptrs[a] = ptrs[a - 1] + int'($urandom_range(0, 9));
      @(negedge clk);
      dma_we = 1; dma_addr = 10'(a); dma_wdata = 16'(ptrs[a]);
    end
    @(negedge clk);
    dma_we = 0;
    for (int pass = 0; pass < 2; pass++) begin
      ptr_base = (pass == 0) ? 16'd0 : 16'd301;
      for (int n = 0; n < 400; n++) begin
        nz_t e;
        e.index = 16'($urandom_range(0, 600));
        e.value = data_t'($urandom);
        q.push_back(e);
      end
      while (q.size() > 0 || expect_q.size() > 0) begin
        @(negedge clk);
        col_ready = ($urandom_range(0, 3) != 0);
      end
      repeat (3) @(negedge clk);
    end
    checks++;
    if (n_cols != 800 || n_odd == 0 || busy) begin failures++; $display("FAIL %0d descriptors, %0d odd", n_cols, n_odd); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
