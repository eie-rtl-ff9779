// tb_eie_full: eie_top at its default size (64 PEs, full-size SRAMs) running
// one complete fully-connected layer of the AlexNet FC7 shape: 4096 inputs,
// 4096 outputs, 9% of the weights kept and 35% of the input activations
// non-zero (the densities the benchmark table gives for that layer). The
// layer fills every activation register of every PE (64 x 64 = 4096). All
// 4096 outputs are compared with the reference model, the broadcasts are
// checked to be exactly the non-zero inputs in increasing order, and the
// sparse-matrix read units are checked to issue one entry per cycle. The
// pass time is printed next to its ideal (the most entries any PE has to
// process), which shows the load-balance efficiency of the 8-deep queues.
`timescale 1ns/1ps
module tb_eie_full;
  import eie_pkg::*;

  localparam int N_PE = 64;
  localparam int MAXR = 4096;
  localparam int MAXC = 4096;

  logic        clk = 1'b0, rst_n = 1'b0;
  host_req_t   host_req = '0;
  logic        host_req_valid = 1'b0, host_req_ready;
  logic [63:0] host_rsp;
  logic        host_rsp_valid, mode, stall;

  always #5 clk = ~clk;

  eie_top dut (.*);

`include "tb_eie_common.svh"

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pb, cycles, nz, ideal;
    longint e0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    gen_codebook();
    gen_matrix(4096, 4096, 9);
    gen_acts(4096, 35);
    load_matrix(4096, 0, 4096, pb);
    write_src_acts(0, 4096);
    ref_pass(4096, 0, 4096, 1'b1);
    // ideal pass time: the largest number of matrix entries any PE must walk
    ideal = 0;
    for (int k = 0; k < N_PE; k++) begin
      int e;
      e = 0;
      for (int j = 0; j < 4096; j++)
        if (avec[j] > 0)
          for (int l = 0; l < 64; l++) if (wcode[l * N_PE + k][j] != 0) e++;
      if (e > ideal) ideal = e;
    end
    e0 = sum_of(m_ent);
    run_pass(4096, pb, 1'b1, 1'b1, cycles);
    check_outputs("FC7 4096x4096", 4096, T_SRC);
    nz = 0;
    for (int j = 0; j < 4096; j++) if (avec[j] > 0) nz++;
    checks++;
    if (n_bcast != nz) begin failures++; $display("broadcasts %0d, non-zero inputs %0d", n_bcast, nz); end
    checks++;
    if (n_order_err != 0) begin failures++; $display("%0d broadcasts out of order", n_order_err); end
    check_rates(cycles, e0, 0);
    count_mechanism("broadcast stall (queue full)", n_stall);
    count_mechanism("adder bypass", sum_of(m_bypass));
    count_mechanism("padding zero entries", sum_of(m_pad));
    $display("pass: %0d cycles, busiest PE %0d non-padding entries, %0d non-zero inputs", cycles, ideal, nz);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
