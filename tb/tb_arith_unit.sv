// tb_arith_unit: streams random matrix entries (rows drawn from a small range
// so that the same accumulator recurs one and two entries apart, with random
// idle cycles) into the arithmetic unit, models the destination register file
// it reads and writes, and compares the final accumulators with a reference
// computed as b_x = sat16(b_x + ((S[v] * a) >>> 8)) in arrival order. Also
// checks that every entry is written back exactly 3 cycles after it enters
// (4-stage pipeline), and counts both bypass cases.
`timescale 1ns/1ps
module tb_arith_unit;
  import eie_pkg::*;
  logic clk = 0, rst_n = 0;
  entry_t ent = '0;
  logic ent_valid = 0, cb_we = 0;
  logic [3:0] cb_idx = '0;
  data_t cb_data = '0;
  logic [REG_AW-1:0] rd_addr, wr_addr;
  data_t rd_data, wr_data;
  logic wr_en, busy;

  data_t regs [REGS];
  int    ref_b [REGS];
  int    cb [16];
  int    checks = 0, failures = 0, n_in = 0, n_wr = 0, n_adj = 0, n_two = 0;
  longint in_cyc [$];
  longint cyc = 0;
  int last_rows [2] = '{-1, -1};

  always #5 clk = ~clk;
  arith_unit dut (.*);

  assign rd_data = regs[rd_addr];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (wr_en && rst_n) regs[wr_addr] <= wr_data;
  end
  always @(negedge clk) begin
    if (ent_valid) in_cyc.push_back(cyc);
    if (wr_en) begin
      longint t;
      n_wr++;
      t = in_cyc.pop_front();
      checks++;
      if (cyc - t != 3) begin failures++; $display("FAIL latency %0d", cyc - t); end
    end
  end

  function automatic int sat16(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int row, a, v;
    for (int i = 0; i < REGS; i++) begin regs[i] = '0; ref_b[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    cb[0] = 0;
    for (int c = 1; c < 16; c++) begin
      @(negedge clk);
      cb_we = 1; cb_idx = 4'(c); cb_data = data_t'(int'($urandom_range(0, 1023)) - 512);
      cb[c] = int'(cb_data);
    end
    @(negedge clk);
    cb_we = 0;
    for (int col = 0; col < 600; col++) begin
      row = -1;
      a = int'($urandom_range(0, 2047)) - 1024;
      for (int e = 0; e < int'($urandom_range(1, 6)); e++) begin
        ent.x     = 4'($urandom_range(0, (col % 3 == 0) ? 15 : 2));
        if (row + int'(ent.x) + 1 > 63) break;
        ent.v     = 4'($urandom);
        ent.act   = data_t'(a);
        ent.first = (e == 0);
        ent_valid = 1;
        row = row + int'(ent.x) + 1;
        ref_b[row] = sat16(longint'(ref_b[row]) + ((longint'(cb[ent.v]) * a) >>> 8));
        if (row == last_rows[0]) n_adj++;
        else if (row == last_rows[1]) n_two++;
        last_rows[1] = last_rows[0];
        last_rows[0] = row;
        n_in++;
        @(negedge clk);
        ent_valid = 0;
        if ($urandom_range(0, 4) == 0) begin
          last_rows = '{-1, last_rows[0]};
          @(negedge clk);
        end
      end
      // columns often start at a small row again, right behind the last one
    end
    repeat (6) @(negedge clk);
    for (int i = 0; i < REGS; i++) begin
      checks++;
      if (int'(regs[i]) != ref_b[i]) begin
        failures++;
        if (failures < 8) $display("FAIL b[%0d] = %0d, expected %0d", i, regs[i], ref_b[i]);
      end
    end
    checks++;
    if (n_wr != n_in) begin failures++; $display("FAIL %0d writes for %0d entries", n_wr, n_in); end
    checks++;
    if (n_adj == 0 || n_two == 0) begin failures++; $display("FAIL hazards not exercised"); end
    checks++;
    if (busy) failures++;
    $display("entries %0d, same row adjacent %0d, two apart %0d", n_in, n_adj, n_two);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
