// tb_eie_top: end-to-end test of eie_top with 16 PEs.
//
// Three layers are run through the master interface:
//   1. a 300-input, 1000-output layer (10% weights, 40% activations), read
//      back after the role swap;
//   2. a second layer fed by layer 1's outputs through the ReLU, without
//      reloading any activation (register-file swap);
//   3. a 1500-input layer split into two batches of up to 1024 inputs that
//      are loaded from the activation SRAM (LOAD_SRC), the first batch
//      clearing and the second accumulating, then stored back to the SRAM
//      (STORE_DST) and read from there.
// Every output is compared with the reference model of tb_eie_common.svh.
// The test also counts the mechanisms of the design (broadcast stalls on a
// full queue, adder bypass, write-through forwarding, padding entries, empty
// columns, zero activations skipped) and fails if one never occurs, and
// checks the one-entry-per-cycle rate of the sparse-matrix read units.
`timescale 1ns/1ps
module tb_eie_top;
  import eie_pkg::*;

  localparam int N_PE = 16;
  localparam int MAXR = 1024;
  localparam int MAXC = 1500;

  logic        clk = 1'b0, rst_n = 1'b0;
  host_req_t   host_req = '0;
  logic        host_req_valid = 1'b0, host_req_ready;
  logic [63:0] host_rsp;
  logic        host_rsp_valid, mode, stall;

  always #5 clk = ~clk;

  eie_top #(.N_PE(N_PE)) dut (.*);

`include "tb_eie_common.svh"

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pb, pb0, pb1, cyc1, cyc2, cyc3, nbc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    gen_codebook();

    // ---- layer 1: 300 -> 1000
    gen_matrix(1000, 300, 10);
    gen_acts(300, 40);
    load_matrix(1000, 0, 300, pb);
    write_src_acts(0, 300);
    ref_pass(1000, 0, 300, 1'b1);
    nbc = n_bcast;
    run_pass(300, pb, 1'b1, 1'b1, cyc1);
    check_outputs("layer1", 1000, T_SRC);
    // only non-zero activations are broadcast
    checks++;
    begin
      int nz = 0;
      for (int j = 0; j < 300; j++) if (avec[j] > 0) nz++;
      if (n_bcast - nbc != nz) begin
        failures++;
        $display("broadcast count %0d, non-zero inputs %0d", n_bcast - nbc, nz);
      end
    end
    check_rates(cyc1, 0, 0);

    // ---- layer 2: 1000 -> 200, input = ReLU(layer 1) already in the source file
    for (int j = 0; j < 1000; j++) avec[j] = relu_i(bref[j]);
    gen_matrix(200, 1000, 15);
    load_matrix(200, 0, 1000, pb);
    ref_pass(200, 0, 1000, 1'b1);
    run_pass(1000, pb, 1'b1, 1'b1, cyc2);
    check_outputs("layer2", 200, T_SRC);

    // ---- layer 3: 1500 -> 600 in two input batches through the Act SRAM
    gen_matrix(600, 1500, 10);
    gen_acts(1500, 35);
    for (int j = 0; j < 1500; j++) begin
      int b, jj;
      b  = j / (N_PE * 64);
      jj = j % (N_PE * 64);
      dma_write(jj % N_PE, T_SRAM, b * 64 + jj / N_PE, 64'(avec[j] & 16'hffff));
    end
    load_matrix(600, 0, 1024, pb0);
    load_matrix(600, 1024, 476, pb1);
    ref_pass(600, 0, 1024, 1'b1);
    ref_pass(600, 1024, 476, 1'b0);
    copy_cmd(OP_LOAD_SRC, 0);
    begin
      int v, bad = 0;
      for (int j = 0; j < 1024; j++) begin
        dma_read(j % N_PE, T_SRC, j / N_PE, v);
        checks++;
        if (v != avec[j]) begin failures++; bad++; if (bad < 4) $display("LOAD_SRC j=%0d got %0d exp %0d", j, v, avec[j]); end
      end
      $display("batch 0 loaded from Act SRAM: %0d wrong", bad);
    end
    run_pass(1024, pb0, 1'b1, 1'b0, cyc3);
    copy_cmd(OP_LOAD_SRC, 64);
    run_pass(476, pb1, 1'b0, 1'b0, cyc3);
    check_outputs("layer3 dst", 600, T_DST);
    copy_cmd(OP_STORE_DST, 512);
    begin
      int v, bad = 0;
      for (int i = 0; i < 600; i++) begin
        dma_read(i % N_PE, T_SRAM, 512 + i / N_PE, v);
        checks++;
        if (v != bref[i]) begin failures++; bad++; end
      end
      $display("layer3 via Act SRAM: 600 rows checked, %0d wrong", bad);
    end

    checks++;
    if (n_order_err != 0) begin failures++; $display("%0d broadcasts out of order", n_order_err); end
    count_mechanism("broadcast stall (queue full)", n_stall);
    count_mechanism("adder bypass", sum_of(m_bypass));
    count_mechanism("write-through forward", sum_of(m_fwd));
    count_mechanism("padding zero entries", sum_of(m_pad));
    count_mechanism("empty columns skipped", sum_of(m_empty));
    count_mechanism("broadcasts", n_bcast);
    $display("pass cycles: layer1 %0d layer2 %0d layer3b %0d", cyc1, cyc2, cyc3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
