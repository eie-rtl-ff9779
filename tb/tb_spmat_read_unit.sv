// tb_spmat_read_unit: fills a small sparse-matrix SRAM with random 8-bit
// entries, then feeds random column descriptors (empty ones, ones within a
// row, ones crossing rows) with random gaps. The unit must emit exactly the
// entries start..stop-1 of each column, in order, with the column's
// activation and the first-of-column flag, at one entry per cycle while a
// column is loaded, and read each SRAM row once per run of entries in it.
`timescale 1ns/1ps
module tb_spmat_read_unit;
  import eie_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0;
  col_t col = '0;
  logic col_valid = 0, col_ready;
  entry_t ent;
  logic ent_valid, busy;
  logic dma_we = 0;
  logic [5:0] dma_addr = '0;
  logic [63:0] dma_wdata = '0;

  logic [7:0] mem [ROWS * 8];
  entry_t expect_q [$];
  int checks = 0, failures = 0, gaps = 0, reads = 0, row_changes = 0, n_ent = 0;
  int last_row = -1;

  always #5 clk = ~clk;
  spmat_read_unit #(.SPMAT_ROWS(ROWS)) dut (.*);

  always @(negedge clk) begin
    if (busy && !ent_valid) gaps++;
    if (dut.rd_en) reads++;
    if (ent_valid) begin
      entry_t e;
      n_ent++;
      e = expect_q.pop_front();
      checks++;
      if (ent != e) begin
        failures++;
        if (failures < 8) $display("FAIL entry %h expected %h", ent, e);
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
    int p;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      dma_we = 1; dma_addr = 6'(r); dma_wdata = {$urandom, $urandom};
      for (int k = 0; k < 8; k++) mem[r * 8 + k] = dma_wdata[8 * k +: 8];
    end
    @(negedge clk);
    dma_we = 0;
    p = 0;
    for (int c = 0; c < 300; c++) begin
      int len;
      len = ($urandom_range(0, 5) == 0) ? 0 : int'($urandom_range(1, 14));
      if (p + len > ROWS * 8) p = 0;
      col.start = 16'(p);
      col.stop  = 16'(p + len);
      col.act   = data_t'($urandom);
      for (int i = p; i < p + len; i++) begin
        entry_t e;
        e.v = mem[i][7:4]; e.x = mem[i][3:0]; e.act = col.act; e.first = (i == p);
        expect_q.push_back(e);
        if (i / 8 != last_row) row_changes++;
        last_row = i / 8;
      end
      // sometimes jump elsewhere, as for a zero activation skipped
      p = ($urandom_range(0, 3) == 0) ? int'($urandom_range(0, ROWS * 8 - 20)) : p + len;
      col_valid = 1;
      do @(posedge clk); while (!col_ready);
      #1 col_valid = 0;
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 4)) @(negedge clk);
      else @(negedge clk);
    end
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    if (expect_q.size() != 0) begin failures++; $display("FAIL %0d entries missing", expect_q.size()); end
    checks++;
    if (gaps != 0) begin failures++; $display("FAIL %0d cycles without an entry while busy", gaps); end
    checks++;
    if (reads > row_changes) begin failures++; $display("FAIL %0d row reads for %0d row changes", reads, row_changes); end
    $display("entries %0d, row reads %0d, row changes %0d", n_ent, reads, row_changes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
