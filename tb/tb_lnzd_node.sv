// tb_lnzd_node: four modelled children each own a disjoint, increasing list
// of indices (as four sub-trees of interleaved PEs do) and offer them with
// random gaps; the parent output is taken with random back-pressure. The
// node's output must be the merge of the four lists in increasing index,
// each item exactly once with its value, and out_done must rise only after
// the last item has been taken and every child reports done.
`timescale 1ns/1ps
module tb_lnzd_node;
  import eie_pkg::*;
  logic clk = 0, rst_n = 0;
  nz_t  in [4];
  logic [3:0] in_valid, in_done, in_ready;
  nz_t  out;
  logic out_valid, out_ready = 0, out_done;

  int   lists [4][$];
  logic [3:0] hold = '0;
  int   expect_q [$];
  int   checks = 0, failures = 0, n_out = 0, running = 0;

  always #5 clk = ~clk;
  lnzd_node dut (.*);

  for (genvar c = 0; c < 4; c++) begin : g_child
    assign in_valid[c] = running && lists[c].size() > 0 && !hold[c];
    assign in_done[c]  = running && lists[c].size() == 0;
    assign in[c].index = (lists[c].size() > 0) ? 16'(lists[c][0]) : '0;
    assign in[c].value = (lists[c].size() > 0) ? data_t'(lists[c][0] * 3 + 1) : '0;
  end

  always @(posedge clk) begin
    // pop just after the edge so the DUT samples the current offer
    automatic logic [3:0] taken = in_valid & in_ready;
    #1;
    for (int c = 0; c < 4; c++)
      if (taken[c]) void'(lists[c].pop_front());
  end
  always @(negedge clk) begin
    for (int c = 0; c < 4; c++) hold[c] = ($urandom_range(0, 3) == 0);
    out_ready = ($urandom_range(0, 2) != 0);
  end
  always @(negedge clk) begin
    if (out_valid && out_ready) begin
      int e;
      n_out++;
      checks++;
      e = expect_q.pop_front();
      if (int'(out.index) != e || int'(out.value) != e * 3 + 1) begin
        failures++;
        if (failures < 8) $display("FAIL output %0d expected %0d", out.index, e);
      end
    end
    if (out_done && running) begin
      checks++;
      if (expect_q.size() != 0) begin failures++; $display("FAIL done with %0d items left", expect_q.size()); end
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
    int w;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < 512; i++)
        if ($urandom_range(0, 99) < ((t % 4 == 0) ? 5 : 40)) begin
          lists[i % 4].push_back(i);
          expect_q.push_back(i);
        end
      running = 1;
      w = 0;
      while (!(out_done && expect_q.size() == 0) && w < 5000) begin
        @(negedge clk);
        w++;
      end
      checks++;
      if (w >= 5000) begin failures++; $display("FAIL pass %0d did not finish", t); end
      running = 0;
      @(negedge clk);
      @(negedge clk);
    end
    $display("outputs %0d", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
