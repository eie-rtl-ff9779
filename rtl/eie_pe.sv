// eie_pe: one processing element of the engine.
//
// A PE owns every N_PE-th row of the weight matrix (rows i with i mod N_PE ==
// PE_ID) in compressed, interleaved CSC form, together with the matching
// input and output activations. For each broadcast non-zero activation
// (a_j, j) it multiplies a_j by the non-zeros of its slice of column j and
// accumulates into its output activations. The path is:
//   act_queue -> ptr_read_unit (p_j, p_j+1) -> spmat_read_unit (one (v,x)
//   entry per cycle) -> arith_unit (codebook, row sum, multiply-add) -> act_rw
// and, in the other direction, act_rw source file -> ReLU -> pe_nzdetect ->
// LNZD tree. q_full stops the CCU's broadcast. busy is high while any stage
// holds work. I/O-mode DMA accesses (dma) are addressed by PE number; writes
// reach the sparse-matrix SRAM, the pointer banks, the codebook, both register
// files and the activation SRAM, reads the register files and the activation
// SRAM (dma_rdata, zero unless this PE was read, valid two cycles after the
// CCU accepted the read). Wiring follows the PE diagram of the paper.
module eie_pe
  import eie_pkg::*;
#(
  parameter int unsigned N_PE        = 64,
  parameter int unsigned PE_ID       = 0,
  parameter int unsigned QUEUE_DEPTH = 8,
  parameter int unsigned PTR_ENTRIES = 16384,
  parameter int unsigned SPMAT_ROWS  = 8192,
  parameter int unsigned ACT_SRAM_WORDS = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  // broadcast from the CCU
  input  nz_t         bcast,
  input  logic        bcast_valid,
  output logic        q_full,
  // offer to the LNZD tree
  output nz_t         nz,
  output logic        nz_valid,
  input  logic        nz_ready,
  output logic        nz_done,
  // control and I/O
  input  pe_ctrl_t    ctrl,
  input  dma_req_t    dma,
  output logic [63:0] dma_rdata,
  output logic        busy
);

  localparam int unsigned PA_W = $clog2(PTR_ENTRIES);
  localparam int unsigned RA_W = $clog2(SPMAT_ROWS);
  localparam int unsigned SA_W = $clog2(ACT_SRAM_WORDS);

  logic sel, we_sel;
  assign sel    = (dma.pe == 8'(PE_ID));
  assign we_sel = sel && dma.we;

  // activation queue
  nz_t  q_head;
  logic q_empty, q_pop;
  act_queue #(.DEPTH(QUEUE_DEPTH)) u_queue (
    .clk, .rst_n, .push(bcast_valid), .din(bcast), .full(q_full),
    .pop(q_pop), .dout(q_head), .empty(q_empty));

  // pointer read
  col_t col;
  logic col_valid, col_ready, ptr_busy;
  ptr_read_unit #(.PTR_ENTRIES(PTR_ENTRIES)) u_ptr (
    .clk, .rst_n, .q_empty, .q_head, .q_pop, .ptr_base(ctrl.ptr_base),
    .col, .col_valid, .col_ready, .busy(ptr_busy),
    .dma_we(we_sel && dma.target == T_PTR), .dma_addr(dma.addr[PA_W-1:0]),
    .dma_wdata(dma.wdata[PTR_W-1:0]));

  // sparse matrix read
  entry_t ent;
  logic   ent_valid, spm_busy;
  spmat_read_unit #(.SPMAT_ROWS(SPMAT_ROWS)) u_spmat (
    .clk, .rst_n, .col, .col_valid, .col_ready, .ent, .ent_valid, .busy(spm_busy),
    .dma_we(we_sel && dma.target == T_SPMAT), .dma_addr(dma.addr[RA_W-1:0]),
    .dma_wdata(dma.wdata));

  // arithmetic unit
  logic [REG_AW-1:0] dst_raddr, dst_waddr;
  data_t             dst_rdata, dst_wdata;
  logic              dst_we, alu_busy;
  arith_unit u_alu (
    .clk, .rst_n, .ent, .ent_valid,
    .cb_we(we_sel && dma.target == T_CODEBOOK), .cb_idx(dma.addr[3:0]),
    .cb_data(dma.wdata[DATA_W-1:0]),
    .rd_addr(dst_raddr), .rd_data(dst_rdata),
    .wr_en(dst_we), .wr_addr(dst_waddr), .wr_data(dst_wdata), .busy(alu_busy));

  // activation read/write
  data_t src_vec [REGS];
  data_t act_rdata;
  logic  act_busy;
  act_rw #(.ACT_SRAM_WORDS(ACT_SRAM_WORDS)) u_act (
    .clk, .rst_n, .clear_dst(ctrl.clear_dst), .swap(ctrl.swap),
    .load_src(ctrl.load_src), .store_dst(ctrl.store_dst),
    .sram_base(SA_W'(ctrl.sram_base)), .busy(act_busy), .src_vec,
    .dst_raddr, .dst_rdata, .dst_we, .dst_waddr, .dst_wdata,
    .dma_we(we_sel), .dma_re(sel && dma.re), .dma_target(dma.target),
    .dma_addr(dma.addr[SA_W-1:0]), .dma_wdata(dma.wdata[DATA_W-1:0]),
    .dma_rdata(act_rdata));

  // leading non-zero detection over the source activations
  pe_nzdetect #(.N_PE(N_PE), .PE_ID(PE_ID)) u_nzd (
    .clk, .rst_n, .start(ctrl.start), .len(ctrl.len), .src_vec,
    .out(nz), .out_valid(nz_valid), .out_ready(nz_ready), .done(nz_done));

  logic rd_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_q <= 1'b0;
    else        rd_q <= sel && dma.re;
  end
  assign dma_rdata = rd_q ? 64'(unsigned'(act_rdata)) : '0;

  assign busy = !q_empty || ptr_busy || spm_busy || alu_busy || act_busy;

endmodule
