// Shared body of the end-to-end testbenches of eie_top.
//
// The including module defines N_PE, MAXR, MAXC and instantiates the engine
// as "dut" with clk/rst_n and the host signals declared below it uses. The
// host model here plays the master: it draws a random pruned, weight-shared
// layer, encodes every PE's slice in interleaved relative-indexed CSC form
// (zero-weight padding entries when a gap exceeds 15 rows), writes pointers,
// matrix rows, codebooks and activations over the DMA path, runs the layer
// and compares the accumulators with a reference computed here in plain
// integer arithmetic: b_i = sat16(b_i + ((S[code] * a_j) >>> 8)), taken in
// increasing column order j.

  localparam int ROW_ENT = 8;

  byte         wcode [MAXR][MAXC];     // weight codes of the current layer, 0 = pruned
  int          cbook [16];             // shared weights
  int          avec  [MAXC];           // input activations
  int          bref  [MAXR];           // reference output
  int          spm_next [N_PE];        // next free matrix entry per PE
  int          ptr_next;               // next free pointer address (same in all PEs)
  int          checks = 0, failures = 0;
  longint      cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic int sat16(longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int relu_i(int v);
    return (v > 0) ? v : 0;
  endfunction

  task automatic send(host_req_t r);
    @(negedge clk);
    while (!host_req_ready) @(negedge clk);
    host_req       = r;
    host_req_valid = 1'b1;
    @(negedge clk);
    host_req_valid = 1'b0;
  endtask

  task automatic dma_write(int pe, dma_target_e t, int addr, logic [63:0] data);
    host_req_t r;
    r.op = OP_WRITE; r.pe = 8'(pe); r.target = t; r.addr = 16'(addr); r.wdata = data;
    send(r);
  endtask

  task automatic dma_read(int pe, dma_target_e t, int addr, output int value);
    host_req_t r;
    r.op = OP_READ; r.pe = 8'(pe); r.target = t; r.addr = 16'(addr); r.wdata = '0;
    send(r);
    while (!host_rsp_valid) @(negedge clk);
    value = int'($signed(host_rsp[15:0]));
  endtask

  // Runs one pass and returns the number of cycles spent in Computing mode.
  task automatic run_pass(int len, int pbase, bit clear, bit swp, output int cycles);
    host_req_t r;
    run_cmd_t  c;
    longint    t0;
    c = '0; c.len = 16'(len); c.ptr_base = 16'(pbase); c.clear_dst = clear; c.swap = swp;
    r.op = OP_RUN; r.pe = '0; r.target = T_SRC; r.addr = '0; r.wdata = 64'(c);
    send(r);
    t0 = cyc;
    @(negedge clk);
    while (!host_req_ready) @(negedge clk);
    cycles = int'(cyc - t0);
  endtask

  task automatic copy_cmd(host_op_e op, int base);
    host_req_t r;
    r.op = op; r.pe = '0; r.target = T_SRAM; r.addr = 16'(base); r.wdata = '0;
    send(r);
    @(negedge clk);
    while (!host_req_ready) @(negedge clk);
  endtask

  task automatic gen_codebook();
    cbook[0] = 0;
    for (int c = 1; c < 16; c++) begin
      cbook[c] = int'($urandom_range(0, 511)) - 256;  // -1.0 .. +1.0 in Q7.8
      if (cbook[c] == 0) cbook[c] = 1;
    end
    for (int k = 0; k < N_PE; k++)
      for (int c = 0; c < 16; c++) dma_write(k, T_CODEBOOK, c, 64'(cbook[c] & 16'hffff));
  endtask

  task automatic gen_matrix(int nr, int nc, int dens_pct);
    for (int i = 0; i < nr; i++)
      for (int j = 0; j < nc; j++)
        wcode[i][j] = ($urandom_range(0, 99) < dens_pct) ? byte'($urandom_range(1, 15)) : 8'sd0;
  endtask

  // Column j of W becomes a_j's column; columns col_off .. col_off+nc-1 of W
  // are loaded as one pass (a batch). Returns the pointer base of the pass.
  task automatic load_matrix(int nr, int col_off, int nc, output int pbase);
    logic [63:0] rowbuf;
    int p, prev, gap, nent;
    pbase = ptr_next;
    for (int k = 0; k < N_PE; k++) begin
      // start every pass on a fresh SRAM row
      p = (spm_next[k] + ROW_ENT - 1) / ROW_ENT * ROW_ENT;
      rowbuf = '0;
      nent = 0;
      for (int j = 0; j < nc; j++) begin
        dma_write(k, T_PTR, pbase + j, 64'(p));
        prev = -1;
        for (int l = 0; l * N_PE + k < nr; l++) begin
          if (wcode[l * N_PE + k][col_off + j] != 0) begin
            gap = l - prev - 1;
            while (gap > 15) begin               // padding zero entry
              rowbuf[(p % ROW_ENT) * 8 +: 8] = {4'd0, 4'd15};
              p++;
              if (p % ROW_ENT == 0) begin dma_write(k, T_SPMAT, p / ROW_ENT - 1, rowbuf); rowbuf = '0; end
              gap  -= 16;
              prev += 16;
            end
            rowbuf[(p % ROW_ENT) * 8 +: 8] = {wcode[l * N_PE + k][col_off + j][3:0], 4'(gap)};
            p++;
            if (p % ROW_ENT == 0) begin dma_write(k, T_SPMAT, p / ROW_ENT - 1, rowbuf); rowbuf = '0; end
            prev = l;
          end
        end
      end
      dma_write(k, T_PTR, pbase + nc, 64'(p));
      if (p % ROW_ENT != 0) dma_write(k, T_SPMAT, p / ROW_ENT, rowbuf);
      spm_next[k] = p;
    end
    ptr_next = pbase + nc + 1;
  endtask

  task automatic gen_acts(int n, int dens_pct);
    for (int j = 0; j < n; j++)
      avec[j] = ($urandom_range(0, 99) < dens_pct) ? int'($urandom_range(1, 512)) : 0;
  endtask

  task automatic write_src_acts(int col_off, int n);
    for (int j = col_off; j < col_off + n; j++)
      dma_write((j - col_off) % N_PE, T_SRC, (j - col_off) / N_PE, 64'(avec[j] & 16'hffff));
  endtask

  // reference: accumulate columns col_off .. col_off+nc-1 into bref
  task automatic ref_pass(int nr, int col_off, int nc, bit clear);
    if (clear) for (int i = 0; i < nr; i++) bref[i] = 0;
    for (int j = col_off; j < col_off + nc; j++) begin
      if (avec[j] > 0)
        for (int i = 0; i < nr; i++)
          if (wcode[i][j] != 0)
            bref[i] = sat16(longint'(bref[i]) + ((longint'(cbook[wcode[i][j]]) * avec[j]) >>> 8));
    end
  endtask

  task automatic check_outputs(string what, int nr, dma_target_e t);
    int v, bad;
    bad = 0;
    for (int i = 0; i < nr; i++) begin
      dma_read(i % N_PE, t, i / N_PE, v);
      checks++;
      if (v != bref[i]) begin
        failures++;
        bad++;
        if (bad <= 5) $display("MISMATCH %s row %0d: got %0d expected %0d", what, i, v, bref[i]);
      end
    end
    $display("%s: %0d rows checked, %0d wrong", what, nr, bad);
  endtask

  // ---- mechanism monitors (per PE, summed at the end)
  int unsigned m_bypass [N_PE];   // adder bypass: same accumulator on adjacent cycles
  int unsigned m_fwd    [N_PE];   // write-through forward: same accumulator two apart
  int unsigned m_pad    [N_PE];   // padding zero entries processed
  int unsigned m_empty  [N_PE];   // empty columns skipped
  int unsigned m_ent    [N_PE];   // matrix entries issued
  int unsigned m_gap    [N_PE];   // cycles a column was loaded but no entry issued
  int unsigned m_rowrd  [N_PE];   // sparse-matrix SRAM row reads in Computing mode
  int unsigned m_cols   [N_PE];   // column descriptors taken
  int unsigned n_bcast = 0, n_stall = 0;

  int last_idx = -1, n_order_err = 0;
  logic mode_d = 1'b0;
  // monitors sample at the falling edge, when every combinational signal of
  // the cycle has settled
  always @(negedge clk) begin
    mode_d <= mode;
    if (mode && !mode_d) last_idx = -1;
    if (dut.u_ccu.bcast_valid) begin
      n_bcast++;
      // the LNZD tree delivers non-zero activations in increasing index order
      if (int'(dut.u_ccu.bcast.index) <= last_idx) begin
        n_order_err++;
        if (n_order_err <= 3) $display("ORDER: index %0d after %0d at %0d root_s=%b", dut.u_ccu.bcast.index, last_idx, cyc, dut.u_ccu.u_root.s);
      end
      last_idx = int'(dut.u_ccu.bcast.index);
    end
    if (stall) n_stall++;
  end

  for (genvar k = 0; k < N_PE; k++) begin : g_mon
    initial begin
      m_bypass[k] = 0; m_fwd[k] = 0; m_pad[k] = 0; m_empty[k] = 0;
      m_ent[k] = 0; m_gap[k] = 0; m_rowrd[k] = 0; m_cols[k] = 0;
    end
    always @(negedge clk) begin
      if (dut.g_pe[k].u_pe.u_alu.s2_valid && dut.g_pe[k].u_pe.u_alu.s3_valid &&
          dut.g_pe[k].u_pe.u_alu.s2_row == dut.g_pe[k].u_pe.u_alu.s3_row) m_bypass[k]++;
      if (dut.g_pe[k].u_pe.u_alu.s1_valid && dut.g_pe[k].u_pe.u_alu.s3_valid &&
          dut.g_pe[k].u_pe.u_alu.s1_row == dut.g_pe[k].u_pe.u_alu.s3_row) m_fwd[k]++;
      if (dut.g_pe[k].u_pe.u_spmat.ent_valid) begin
        m_ent[k]++;
        if (dut.g_pe[k].u_pe.u_spmat.ent.v == 4'd0) m_pad[k]++;
      end
      if (dut.g_pe[k].u_pe.u_spmat.col_valid && dut.g_pe[k].u_pe.u_spmat.col_ready) begin
        m_cols[k]++;
        if (dut.g_pe[k].u_pe.u_spmat.col.start == dut.g_pe[k].u_pe.u_spmat.col.stop) m_empty[k]++;
      end
      if (dut.g_pe[k].u_pe.u_spmat.busy && !dut.g_pe[k].u_pe.u_spmat.ent_valid) m_gap[k]++;
      if (mode && dut.g_pe[k].u_pe.u_spmat.rd_en) m_rowrd[k]++;
    end
  end

  function automatic longint sum_of(int unsigned a [N_PE]);
    longint s = 0;
    for (int k = 0; k < N_PE; k++) s += a[k];
    return s;
  endfunction

  task automatic count_mechanism(string name, longint n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("MECHANISM %s never happened", name);
    end else begin
      $display("mechanism %-28s %0d", name, n);
    end
  endtask

  task automatic check_rates(int cycles, longint ent_before, longint cols_before);
    longint ents, gaps, rows, cols;
    ents = sum_of(m_ent);
    gaps = sum_of(m_gap);
    rows = sum_of(m_rowrd);
    cols = sum_of(m_cols);
    // one entry per cycle whenever a column is being walked
    checks++;
    if (gaps != 0) begin failures++; $display("RATE: %0d cycles with a column loaded but no entry", gaps); end
    // the SRAM is read about once per 8 entries: at most one read per row
    // crossed plus one per column start
    checks++;
    if (rows > (ents + 7) / 8 + cols + N_PE) begin
      failures++;
      $display("RATE: %0d row reads for %0d entries in %0d columns", rows, ents, cols);
    end
    $display("entries=%0d columns=%0d row_reads=%0d last_pass_cycles=%0d (ent %0d col %0d before)",
             ents, cols, rows, cycles, ent_before, cols_before);
  endtask

  initial begin
    for (int k = 0; k < N_PE; k++) spm_next[k] = 0;
    ptr_next = 0;
  end
