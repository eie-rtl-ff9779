// tb_eie_pe: one processing element (PE 1 of 4) driven directly through its
// control and DMA ports. Loads a codebook, a random sparse matrix for the
// PE's 64 local rows (compressed sparse column, 4-bit codes and 4-bit zero
// counts with padding entries for long gaps) and its column pointers, then
// broadcasts random non-zero activations in increasing column order,
// respecting the queue-full signal, with random gaps. After the PE goes idle
// the destination registers are read back over DMA and compared with a
// reference accumulation. Also checks: DMA requests for another PE neither
// write nor return data; the non-zero detector offers this PE's non-zero
// source activations with global index 4*i+1; clear_dst zeroes the
// accumulators; the queue fills (back-pressure seen).
`timescale 1ns/1ps
module tb_eie_pe;
  import eie_pkg::*;
  localparam int NPE = 4, ID = 1, COLS = 200;
  logic clk = 0, rst_n = 0;
  nz_t  bcast = '0;
  logic bcast_valid = 0, q_full;
  nz_t  nz;
  logic nz_valid, nz_ready = 0, nz_done;
  pe_ctrl_t ctrl = '0;
  dma_req_t dma = '0;
  logic [63:0] dma_rdata;
  logic busy;

  int cb [16];
  int w [64][COLS];
  int ref_b [64];
  int checks = 0, failures = 0, n_full = 0;

  always #5 clk = ~clk;
  eie_pe #(.N_PE(NPE), .PE_ID(ID), .PTR_ENTRIES(1024), .SPMAT_ROWS(512), .ACT_SRAM_WORDS(256)) dut (.*);

  always @(negedge clk) if (q_full) n_full++;

  function automatic int sat16(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  task automatic dma_write(int pe, dma_target_e tg, int addr, logic [63:0] data);
    dma = '0;
    dma.we = 1; dma.pe = 8'(pe); dma.target = tg; dma.addr = 16'(addr); dma.wdata = data;
    @(negedge clk);
    dma = '0;
  endtask

  task automatic dma_read(int pe, dma_target_e tg, int addr, output logic [63:0] data);
    dma = '0;
    dma.re = 1; dma.pe = 8'(pe); dma.target = tg; dma.addr = 16'(addr);
    @(negedge clk);
    dma = '0;
    data = dma_rdata;
    @(negedge clk);
  endtask

  task automatic pulse_start(int len, logic clear);
    ctrl.start = 1; ctrl.clear_dst = clear; ctrl.len = 16'(len); ctrl.ptr_base = '0;
    @(negedge clk);
    ctrl.start = 0; ctrl.clear_dst = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] word, rd;
    int nent, last, gap;
    int exp_idx [$];
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // codebook
    cb[0] = 0;
    for (int c = 1; c < 16; c++) begin
      cb[c] = int'($urandom_range(0, 1023)) - 512;
      dma_write(ID, T_CODEBOOK, c, 64'(unsigned'(16'(cb[c]))));
    end
    // matrix, encoded column by column
    nent = 0;
    word = '0;
    for (int j = 0; j < COLS; j++) begin
      dma_write(ID, T_PTR, j, 64'(nent));
      last = -1;
      for (int r = 0; r < 64; r++) begin
        w[r][j] = ($urandom_range(0, 99) < ((j % 7 == 0) ? 3 : 15)) ? int'($urandom_range(1, 15)) : 0;
        if (w[r][j] != 0) begin
          gap = r - last - 1;
          while (gap > 15) begin
            word[8 * (nent % 8) +: 8] = 8'h0f;
            nent++;
            if (nent % 8 == 0) begin dma_write(ID, T_SPMAT, nent / 8 - 1, word); word = '0; end
            gap -= 16;
          end
          word[8 * (nent % 8) +: 8] = {4'(w[r][j]), 4'(gap)};
          nent++;
          if (nent % 8 == 0) begin dma_write(ID, T_SPMAT, nent / 8 - 1, word); word = '0; end
          last = r;
        end
      end
    end
    dma_write(ID, T_PTR, COLS, 64'(nent));
    if (nent % 8 != 0) dma_write(ID, T_SPMAT, nent / 8, word);
    // a write addressed to another PE must be ignored
    dma_write(ID + 1, T_CODEBOOK, 1, 64'h1234);

    // source activations for the non-zero detector, then one pass
    for (int i = 0; i < 64; i++) begin
      int a;
      a = ($urandom_range(0, 1) != 0) ? int'($urandom_range(1, 2000)) : 0;
      if (i % 9 == 0) a = -a;
      dma_write(ID, T_SRC, i, 64'(unsigned'(16'(a))));
      if (a > 0 && i * NPE + ID < 250) exp_idx.push_back(i * NPE + ID);
    end
    for (int r = 0; r < 64; r++) ref_b[r] = 0;
    pulse_start(250, 1'b1);
    nz_ready = 1;
    fork
      begin
        // broadcast random activations in increasing column order
        for (int j = 0; j < COLS; j++) begin
          int a;
          if ($urandom_range(0, 2) == 0) continue;
          a = int'($urandom_range(0, 4000)) - 2000;
          if (a == 0) a = 1;
          while (q_full) @(negedge clk);
          bcast.index = 16'(j); bcast.value = data_t'(a); bcast_valid = 1;
          for (int r = 0; r < 64; r++)
            if (w[r][j] != 0) ref_b[r] = sat16(longint'(ref_b[r]) + ((longint'(cb[w[r][j]]) * a) >>> 8));
          @(negedge clk);
          bcast_valid = 0;
          if ($urandom_range(0, 5) == 0) @(negedge clk);
        end
      end
      begin
        int k;
        k = 0;
        while (!nz_done || k == 0) begin
          if (nz_valid) begin
            checks++;
            if (exp_idx.size() == 0 || int'(nz.index) != exp_idx[0]) begin
              failures++; $display("FAIL offer index %0d", nz.index);
            end else void'(exp_idx.pop_front());
          end
          k++;
          @(negedge clk);
        end
      end
    join
    nz_ready = 0;
    checks++;
    if (exp_idx.size() != 0) begin failures++; $display("FAIL %0d offers missing", exp_idx.size()); end
    while (busy) @(negedge clk);
    for (int r = 0; r < 64; r++) begin
      dma_read(ID, T_DST, r, rd);
      checks++;
      if (int'(signed'(rd[15:0])) != ref_b[r]) begin
        failures++;
        if (failures < 8) $display("FAIL dst[%0d] = %0d expected %0d", r, signed'(rd[15:0]), ref_b[r]);
      end
      dma_read(ID + 2, T_DST, r, rd);
      checks++;
      if (rd != 0) begin failures++; $display("FAIL other PE's read returned data"); end
    end
    // clear_dst
    pulse_start(0, 1'b1);
    repeat (3) @(negedge clk);
    for (int r = 0; r < 64; r += 7) begin
      dma_read(ID, T_DST, r, rd);
      checks++;
      if (rd != 0) begin failures++; $display("FAIL dst[%0d] not cleared", r); end
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL queue never filled"); end
    $display("entries %0d, queue-full cycles %0d", nent, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
