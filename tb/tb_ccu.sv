// tb_ccu: exercises the central control unit with 4 modelled PEs.
// I/O mode: write and read requests must appear on the DMA bus one cycle
// after acceptance with the same fields, and a read's data (returned by the
// modelled PEs one cycle after the DMA read) must come back on host_rsp two
// cycles after acceptance. Computing mode: a run command must pulse start
// with its length, pointer base and clear flag, then broadcast the merged
// offers of the four children in increasing index while random queue-full
// signals hold the broadcast (stall raised, nothing sent). The run must end
// only when everything is broadcast and the PEs are idle, and pulse swap
// only if asked. Load/store commands must pulse their strobe with the SRAM
// base and hold off new requests while the PEs are busy.
`timescale 1ns/1ps
module tb_ccu;
  import eie_pkg::*;
  localparam int NPE = 4;
  logic clk = 0, rst_n = 0;
  host_req_t host_req = '0;
  logic host_req_valid = 0, host_req_ready;
  logic [63:0] host_rsp;
  logic host_rsp_valid, mode;
  nz_t  child [4];
  logic [3:0] child_valid, child_done, child_ready;
  nz_t  bcast;
  logic bcast_valid, stall;
  logic [NPE-1:0] pe_full = '0, pe_busy = '0;
  pe_ctrl_t pe_ctrl;
  dma_req_t dma;
  logic [63:0] dma_rdata = '0;

  int lists [4][$];
  int expect_q [$];
  int checks = 0, failures = 0, n_bcast = 0, n_stall = 0, n_swap = 0, n_start = 0;
  int busy_left = 0;
  logic running = 0;

  always #5 clk = ~clk;
  ccu #(.N_PE(NPE)) dut (.*);

  for (genvar c = 0; c < 4; c++) begin : g_child
    assign child_valid[c] = running && lists[c].size() > 0;
    assign child_done[c]  = !running || lists[c].size() == 0;
    assign child[c].index = (lists[c].size() > 0) ? 16'(lists[c][0]) : '0;
    assign child[c].value = (lists[c].size() > 0) ? data_t'(lists[c][0] + 7) : '0;
  end

  // modelled PEs: pop offers, return read data one cycle after a DMA read,
  // stay busy for a while after each broadcast
  always @(posedge clk) begin
    // pop just after the edge so the DUT samples the current offer
    automatic logic [3:0] taken = child_valid & child_ready;
    dma_rdata <= dma.re ? {dma.wdata[31:0] ^ 32'h5a5a, 8'(dma.pe), 8'(dma.target), dma.addr} : '0;
    if (bcast_valid) busy_left <= 6;
    else if (busy_left > 0) busy_left <= busy_left - 1;
    #1;
    for (int c = 0; c < 4; c++)
      if (taken[c]) void'(lists[c].pop_front());
  end
  // drive the PE status for the coming edge, then sample what the CCU does
  always @(negedge clk) begin
    pe_busy = (busy_left > 0) ? 4'b0100 : 4'b0000;
    pe_full = ($urandom_range(0, 3) == 0) ? 4'b0010 : 4'b0000;
    #2;
    if (stall) n_stall++;
    if (pe_ctrl.swap) n_swap++;
    if (pe_ctrl.start) n_start++;
    if (bcast_valid) begin
      int e;
      n_bcast++;
      checks++;
      e = expect_q.pop_front();
      if (int'(bcast.index) != e || int'(bcast.value) != e + 7 || |pe_full) begin
        failures++;
        if (failures < 8) $display("FAIL broadcast %0d expected %0d (full %b)", bcast.index, e, pe_full);
      end
    end
  end

  task automatic send(host_req_t r);
    host_req = r;
    host_req_valid = 1;
    do @(posedge clk); while (!host_req_ready);
    #1 host_req_valid = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_req_t r;
    run_cmd_t  rc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // DMA writes and reads
    for (int t = 0; t < 200; t++) begin
      r = '0;
      r.op     = ($urandom_range(0, 1) != 0) ? OP_WRITE : OP_READ;
      r.pe     = 8'($urandom_range(0, NPE - 1));
      r.target = dma_target_e'($urandom_range(0, 5));
      r.addr   = 16'($urandom);
      r.wdata  = {$urandom, $urandom};
      send(r);
      @(negedge clk);
      checks++;
      if (dma.we != (r.op == OP_WRITE) || dma.re != (r.op == OP_READ) || dma.pe != r.pe ||
          dma.target != r.target || dma.addr != r.addr || dma.wdata != r.wdata) begin
        failures++; $display("FAIL DMA request fields");
      end
      @(negedge clk);
      checks++;
      if (host_rsp_valid != (r.op == OP_READ) ||
          (r.op == OP_READ && host_rsp != {r.wdata[31:0] ^ 32'h5a5a, r.pe, 8'(r.target), r.addr})) begin
        failures++; $display("FAIL read response valid %b data %h", host_rsp_valid, host_rsp);
      end
    end
    // runs
    for (int t = 0; t < 40; t++) begin
      int w, s0, idle;
      for (int i = 0; i < 300; i++)
        if ($urandom_range(0, 2) == 0) begin lists[i % 4].push_back(i); expect_q.push_back(i); end
      rc = '0;
      rc.len = 16'($urandom); rc.ptr_base = 16'($urandom);
      rc.clear_dst = 1'($urandom); rc.swap = 1'($urandom);
      r = '0; r.op = OP_RUN; r.wdata = 64'(rc);
      s0 = n_swap;
      running = 1;
      send(r);
      @(negedge clk);
      checks++;
      if (!pe_ctrl.start || pe_ctrl.len != rc.len || pe_ctrl.ptr_base != rc.ptr_base ||
          pe_ctrl.clear_dst != rc.clear_dst || !mode || host_req_ready) begin
        failures++; $display("FAIL run start pulse or mode");
      end
      w = 0;
      idle = 0;
      while (mode && w < 5000) begin
        @(negedge clk);
        w++;
        if (expect_q.size() == 0 && busy_left == 0 && !pe_full[1]) idle++;
        else idle = 0;
        if (mode && idle > 6) begin
          failures++; $display("FAIL run still active %0d cycles after the PEs went quiet", idle);
        end
      end
      checks++;
      if (expect_q.size() != 0 || busy_left != 0) begin
        failures++; $display("FAIL run %0d ended with %0d pending, busy %0d", t, expect_q.size(), busy_left);
      end
      @(negedge clk);
      checks++;
      if (n_swap - s0 != int'(rc.swap)) begin failures++; $display("FAIL swap pulses %0d", n_swap - s0); end
      running = 0;
    end
    // load and store
    for (int t = 0; t < 10; t++) begin
      r = '0;
      r.op = (t % 2) ? OP_STORE_DST : OP_LOAD_SRC;
      r.addr = 16'($urandom_range(0, 1023));
      send(r);
      @(negedge clk);
      checks++;
      if (pe_ctrl.load_src != (r.op == OP_LOAD_SRC) || pe_ctrl.store_dst != (r.op == OP_STORE_DST) ||
          pe_ctrl.sram_base != r.addr[9:0]) begin
        failures++; $display("FAIL copy pulse");
      end
      busy_left = 0;
      force pe_busy = 4'b0001;
      repeat (10) begin
        @(negedge clk);
        checks++;
        if (host_req_ready) begin failures++; $display("FAIL accepts requests while copying"); end
      end
      release pe_busy;
      repeat (5) @(negedge clk);
      checks++;
      if (!host_req_ready) begin failures++; $display("FAIL copy did not end"); end
    end
    checks++;
    if (n_stall == 0 || n_start != 40) begin failures++; $display("FAIL stalls %0d starts %0d", n_stall, n_start); end
    $display("broadcasts %0d, stall cycles %0d, swaps %0d", n_bcast, n_stall, n_swap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
