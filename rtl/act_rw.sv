// act_rw: the activation read/write unit of a PE.
//
// Holds two register files of 64 16-bit activations. One is the source file
// (this PE's share of the input vector a, scanned by the non-zero detector),
// the other the destination file (the accumulators b_x of the arithmetic
// unit). A one-cycle swap exchanges their roles, so the output of one layer is
// the input of the next without moving data. clear_dst zeroes every
// accumulator in one cycle before a layer.
//
// Vectors longer than 64 activations per PE (4K over 64 PEs) are processed in
// batches through the 2KB activation SRAM (1024 words): load_src copies 64
// words from SRAM[sram_base] into the source file and store_dst copies the
// destination file to SRAM[sram_base]; each copy takes 64 cycles plus one,
// one word per cycle over the single SRAM port, with busy high meanwhile.
// In I/O mode the master reads and writes both files and the SRAM
// (dma_*; reads answer on dma_rdata one cycle after dma_re).
// The register files, their swap and the SRAM size are the paper's; copy
// timing and the DMA port are this design's. src_sel resets to file 0.
module act_rw
  import eie_pkg::*;
#(
  parameter int unsigned ACT_SRAM_WORDS = 1024,
  localparam int unsigned SA_W = $clog2(ACT_SRAM_WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear_dst,
  input  logic              swap,
  input  logic              load_src,
  input  logic              store_dst,
  input  logic [SA_W-1:0]   sram_base,
  output logic              busy,
  // whole source file, for the non-zero detector
  output data_t             src_vec [REGS],
  // accumulator port of the arithmetic unit
  input  logic [REG_AW-1:0] dst_raddr,
  output data_t             dst_rdata,
  input  logic              dst_we,
  input  logic [REG_AW-1:0] dst_waddr,
  input  data_t             dst_wdata,
  // I/O mode access
  input  logic              dma_we,
  input  logic              dma_re,
  input  dma_target_e       dma_target,
  input  logic [SA_W-1:0]   dma_addr,
  input  data_t             dma_wdata,
  output data_t             dma_rdata
);

  data_t rf [2][REGS];
  logic  src_sel;

  typedef enum logic [1:0] {C_IDLE, C_LOAD, C_STORE} copy_e;
  copy_e           copy_q;
  logic [6:0]      cnt;         // words issued
  logic            ld_pending;  // SRAM read data to write this cycle
  logic [REG_AW-1:0] ld_idx;

  // SRAM port
  logic            s_en, s_we;
  logic [SA_W-1:0] s_addr;
  data_t           s_wdata, s_rdata;

  always_comb begin
    s_en    = 1'b0;
    s_we    = 1'b0;
    s_addr  = dma_addr;
    s_wdata = dma_wdata;
    if (copy_q == C_LOAD && cnt < 7'd64) begin
      s_en   = 1'b1;
      s_addr = sram_base + SA_W'(cnt);
    end else if (copy_q == C_STORE && cnt < 7'd64) begin
      s_en    = 1'b1;
      s_we    = 1'b1;
      s_addr  = sram_base + SA_W'(cnt);
      s_wdata = rf[~src_sel][cnt[REG_AW-1:0]];
    end else if ((dma_we || dma_re) && dma_target == T_SRAM) begin
      s_en = 1'b1;
      s_we = dma_we;
    end
  end

  sram_sp #(.WIDTH(DATA_W), .DEPTH(ACT_SRAM_WORDS)) u_act_sram (
    .clk, .en(s_en), .we(s_we), .addr(s_addr), .wdata(s_wdata), .rdata(s_rdata));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_sel    <= 1'b0;
      copy_q     <= C_IDLE;
      cnt        <= '0;
      ld_pending <= 1'b0;
      ld_idx     <= '0;
      for (int f = 0; f < 2; f++)
        for (int i = 0; i < REGS; i++) rf[f][i] <= '0;
    end else begin
      if (swap) src_sel <= ~src_sel;
      if (clear_dst)
        for (int i = 0; i < REGS; i++) rf[~src_sel][i] <= '0;
      if (dst_we) rf[~src_sel][dst_waddr] <= dst_wdata;
      if (dma_we && dma_target == T_SRC) rf[src_sel][dma_addr[REG_AW-1:0]]  <= dma_wdata;
      if (dma_we && dma_target == T_DST) rf[~src_sel][dma_addr[REG_AW-1:0]] <= dma_wdata;
      // batch copies
      ld_pending <= (copy_q == C_LOAD) && (cnt < 7'd64);
      ld_idx     <= cnt[REG_AW-1:0];
      if (ld_pending) rf[src_sel][ld_idx] <= s_rdata;
      if (copy_q == C_IDLE) begin
        cnt <= '0;
        if (load_src)       copy_q <= C_LOAD;
        else if (store_dst) copy_q <= C_STORE;
      end else if (cnt < 7'd64) begin
        cnt <= cnt + 1'b1;
      end else begin
        copy_q <= C_IDLE;
      end
    end
  end

  // DMA read: register files answer one cycle later, like the SRAM.
  dma_target_e rd_target;
  data_t       rd_rf;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_target <= T_SRC;
      rd_rf     <= '0;
    end else if (dma_re) begin
      rd_target <= dma_target;
      rd_rf     <= (dma_target == T_DST) ? rf[~src_sel][dma_addr[REG_AW-1:0]]
                                         : rf[src_sel][dma_addr[REG_AW-1:0]];
    end
  end
  assign dma_rdata = (rd_target == T_SRAM) ? s_rdata : rd_rf;

  assign src_vec   = rf[src_sel];
  assign dst_rdata = rf[~src_sel][dst_raddr];
  assign busy      = (copy_q != C_IDLE) || ld_pending;

endmodule
