// eie_top: the Efficient Inference Engine, N_PE processing elements under
// one central control unit.
//
// Rows of the layer's weight matrix, and the matching activations, are
// interleaved over the PEs (row i lives in PE i mod N_PE). Every PE's
// leading non-zero detector feeds a quadtree of lnzd_node instances
// (N_PE/4 + N_PE/16 + ... nodes, e.g. 16 + 4 for 64 PEs) whose root sits in
// the CCU; the CCU broadcasts each selected (a_j, j) to all PE queues over a
// single fan-out bus (the paper routes it as an H-tree), holding it while any
// queue is full. DMA requests go to all PEs, which match the PE number; read
// data of the selected PE is ORed back to the CCU.
//
// Tree numbering: links 0..N_PE-1 are the PEs' offers; node m reads links
// 4m..4m+3 and drives link N_PE+m; the last four links feed the root.
// N_PE must be a power of four. Ports are the master interface of the CCU
// plus mode and the per-cycle stall indication.
module eie_top
  import eie_pkg::*;
#(
  parameter int unsigned N_PE           = 64,
  parameter int unsigned QUEUE_DEPTH    = 8,
  parameter int unsigned PTR_ENTRIES    = 16384,
  parameter int unsigned SPMAT_ROWS     = 8192,
  parameter int unsigned ACT_SRAM_WORDS = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  host_req_t   host_req,
  input  logic        host_req_valid,
  output logic        host_req_ready,
  output logic [63:0] host_rsp,
  output logic        host_rsp_valid,
  output logic        mode,
  output logic        stall
);

  localparam int unsigned M     = (N_PE - 4) / 3;  // nodes below the root
  localparam int unsigned LINKS = N_PE + M;

  nz_t             link       [LINKS];
  logic [LINKS-1:0] link_valid, link_ready, link_done;

  nz_t             bcast;
  logic            bcast_valid;
  logic [N_PE-1:0] pe_full, pe_busy;
  pe_ctrl_t        pe_ctrl;
  dma_req_t        dma;
  logic [63:0]     pe_rdata [N_PE];
  logic [63:0]     dma_rdata;

  for (genvar k = 0; k < N_PE; k++) begin : g_pe
    eie_pe #(
      .N_PE(N_PE), .PE_ID(k), .QUEUE_DEPTH(QUEUE_DEPTH), .PTR_ENTRIES(PTR_ENTRIES),
      .SPMAT_ROWS(SPMAT_ROWS), .ACT_SRAM_WORDS(ACT_SRAM_WORDS)
    ) u_pe (
      .clk, .rst_n, .bcast, .bcast_valid, .q_full(pe_full[k]),
      .nz(link[k]), .nz_valid(link_valid[k]), .nz_ready(link_ready[k]), .nz_done(link_done[k]),
      .ctrl(pe_ctrl), .dma, .dma_rdata(pe_rdata[k]), .busy(pe_busy[k]));
  end

  for (genvar m = 0; m < M; m++) begin : g_node
    nz_t  n_in [4];
    for (genvar c = 0; c < 4; c++) begin : g_in
      assign n_in[c] = link[4*m + c];
    end
    lnzd_node u_node (
      .clk, .rst_n, .in(n_in), .in_valid(link_valid[4*m +: 4]), .in_done(link_done[4*m +: 4]),
      .in_ready(link_ready[4*m +: 4]), .out(link[N_PE + m]), .out_valid(link_valid[N_PE + m]),
      .out_ready(link_ready[N_PE + m]), .out_done(link_done[N_PE + m]));
  end

  nz_t root_in [4];
  for (genvar c = 0; c < 4; c++) begin : g_root_in
    assign root_in[c] = link[LINKS - 4 + c];
  end

  always_comb begin
    dma_rdata = '0;
    for (int k = 0; k < int'(N_PE); k++) dma_rdata |= pe_rdata[k];
  end

  ccu #(.N_PE(N_PE)) u_ccu (
    .clk, .rst_n, .host_req, .host_req_valid, .host_req_ready, .host_rsp, .host_rsp_valid, .mode,
    .child(root_in), .child_valid(link_valid[LINKS-4 +: 4]), .child_done(link_done[LINKS-4 +: 4]),
    .child_ready(link_ready[LINKS-4 +: 4]), .bcast, .bcast_valid, .stall,
    .pe_full, .pe_busy, .pe_ctrl, .dma, .dma_rdata);

endmodule
