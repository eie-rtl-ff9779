// tb_pe_nzdetect: drives random source-activation register files (zeros,
// negatives and positives) into the non-zero detector of PE 2 of 4 and
// pulses start with random layer lengths. Collects the offers with random
// back-pressure and compares them with the reference list: every local slot
// i below the PE's share of the length whose ReLU output is non-zero, in
// increasing i, carrying value relu(r[i]) and global index 4*i+2. Checks
// that done rises once all offers are taken and that a second start in the
// same pass does not repeat stale entries.
`timescale 1ns/1ps
module tb_pe_nzdetect;
  import eie_pkg::*;
  localparam int NPE = 4, ID = 2;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [15:0] len = '0;
  data_t src_vec [REGS];
  nz_t  out;
  logic out_valid, out_ready = 0, done;
  nz_t  expect_q [$];
  int   checks = 0, failures = 0, n_out = 0;

  always #5 clk = ~clk;
  pe_nzdetect #(.N_PE(NPE), .PE_ID(ID)) dut (.*);

  always @(negedge clk) begin
    if (out_valid && out_ready) begin
      nz_t e;
      n_out++;
      checks++;
      if (expect_q.size() == 0) begin
        failures++; $display("FAIL unexpected offer index %0d", out.index);
      end else begin
        e = expect_q.pop_front();
        if (out != e) begin
          failures++;
          if (failures < 8) $display("FAIL offer %0d/%0d expected %0d/%0d", out.index, out.value, e.index, e.value);
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_local, wait_cyc;
    for (int i = 0; i < REGS; i++) src_vec[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (!done || out_valid) begin failures++; $display("FAIL not idle after reset"); end
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < REGS; i++)
        case ($urandom_range(0, 3))
          0, 1: src_vec[i] = '0;
          2: src_vec[i] = -data_t'($urandom_range(1, 30000));
          default: src_vec[i] = data_t'($urandom_range(1, 30000));
        endcase
      len = (t % 10 == 0) ? 16'(NPE * REGS) : 16'($urandom_range(0, NPE * REGS));
      n_local = (int'(len) > ID) ? ((int'(len) - ID - 1) / NPE) + 1 : 0;
      for (int i = 0; i < n_local; i++)
        if (src_vec[i] > 0) expect_q.push_back('{value: src_vec[i], index: 16'(i * NPE + ID)});
      start = 1;
      @(negedge clk);
      start = 0;
      wait_cyc = 0;
      while (!done && wait_cyc < 1000) begin
        out_ready = ($urandom_range(0, 2) != 0);
        @(negedge clk);
        wait_cyc++;
      end
      out_ready = 0;
      checks++;
      if (expect_q.size() != 0) begin
        failures++; $display("FAIL pass %0d: %0d offers missing", t, expect_q.size());
        expect_q.delete();
      end
      repeat ($urandom_range(0, 3)) @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL offer after done"); end
    end
    $display("offers %0d", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
