// ccu: central control unit, root of the leading non-zero detection tree.
//
// The CCU talks to the master (host_req / host_rsp) and has two modes.
// In I/O mode (mode = 0) it turns OP_WRITE / OP_READ requests into DMA
// accesses of one PE's memories (one per cycle; read data returns on
// host_rsp two cycles after the request is accepted) and starts batch copies
// between the activation SRAM and the register files of all PEs
// (OP_LOAD_SRC / OP_STORE_DST, addr = SRAM word address).
// OP_RUN switches to Computing mode (mode = 1) for one M x V pass whose input
// length and pointer-array start address come in wdata (run_cmd_t). The CCU
// optionally clears the accumulators, starts every PE's detector, and then
// repeatedly takes the leading non-zero activation from the root LNZD node
// (its own lnzd_node instance) and broadcasts it to every PE queue in the
// same cycle. The broadcast is held while any PE queue is full (stall). The
// pass is over when the tree is exhausted and no PE is busy for two
// consecutive cycles; the CCU then swaps source and destination files if
// asked and returns to I/O mode. host_req_ready is high only in I/O mode.
// The two modes, the length and pointer-start registers and the stall rule
// are the paper's; the command encoding and completion test are this
// design's.
module ccu
  import eie_pkg::*;
#(
  parameter int unsigned N_PE = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // master interface
  input  host_req_t         host_req,
  input  logic              host_req_valid,
  output logic              host_req_ready,
  output logic [63:0]       host_rsp,
  output logic              host_rsp_valid,
  output logic              mode,
  // the four children of the root node
  input  nz_t               child       [4],
  input  logic [3:0]        child_valid,
  input  logic [3:0]        child_done,
  output logic [3:0]        child_ready,
  // broadcast and PE status
  output nz_t               bcast,
  output logic              bcast_valid,
  output logic              stall,
  input  logic [N_PE-1:0]   pe_full,
  input  logic [N_PE-1:0]   pe_busy,
  // PE control and DMA
  output pe_ctrl_t          pe_ctrl,
  output dma_req_t          dma,
  input  logic [63:0]       dma_rdata
);

  typedef enum logic [1:0] {S_IO, S_RUN, S_COPY} state_e;
  state_e   state;
  run_cmd_t run_q;
  logic [1:0] settle;
  logic     quiet, quiet_d, rsp_pend;

  // root LNZD node
  nz_t  root;
  logic root_valid, root_ready, root_done;
  lnzd_node u_root (
    .clk, .rst_n, .in(child), .in_valid(child_valid), .in_done(child_done),
    .in_ready(child_ready), .out(root), .out_valid(root_valid),
    .out_ready(root_ready), .out_done(root_done));

  assign root_ready  = (state == S_RUN) && !(|pe_full);
  assign bcast       = root;
  assign bcast_valid = root_valid && root_ready;
  assign stall       = (state == S_RUN) && root_valid && (|pe_full);

  assign host_req_ready = (state == S_IO);
  assign mode           = (state == S_RUN);
  assign quiet          = root_done && !(|pe_busy);

  logic accept;
  run_cmd_t req_run;
  assign req_run = run_cmd_t'(host_req.wdata);
  assign accept = host_req_valid && host_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IO;
      run_q    <= '0;
      settle   <= '0;
      quiet_d  <= 1'b0;
      rsp_pend <= 1'b0;
      dma      <= '0;
      pe_ctrl  <= '0;
    end else begin
      // one-cycle pulses
      pe_ctrl.start     <= 1'b0;
      pe_ctrl.clear_dst <= 1'b0;
      pe_ctrl.swap      <= 1'b0;
      pe_ctrl.load_src  <= 1'b0;
      pe_ctrl.store_dst <= 1'b0;
      dma.we            <= 1'b0;
      dma.re            <= 1'b0;
      rsp_pend          <= dma.re;
      quiet_d           <= quiet;
      if (settle != 2'd3) settle <= settle + 1'b1;

      unique case (state)
        S_IO: if (accept) begin
          unique case (host_req.op)
            OP_WRITE, OP_READ: begin
              dma.we     <= (host_req.op == OP_WRITE);
              dma.re     <= (host_req.op == OP_READ);
              dma.pe     <= host_req.pe;
              dma.target <= host_req.target;
              dma.addr   <= host_req.addr;
              dma.wdata  <= host_req.wdata;
            end
            OP_RUN: begin
              run_q             <= req_run;
              pe_ctrl.start     <= 1'b1;
              pe_ctrl.clear_dst <= req_run.clear_dst;
              pe_ctrl.len       <= req_run.len;
              pe_ctrl.ptr_base  <= req_run.ptr_base;
              settle            <= '0;
              state             <= S_RUN;
            end
            OP_LOAD_SRC, OP_STORE_DST: begin
              pe_ctrl.load_src  <= (host_req.op == OP_LOAD_SRC);
              pe_ctrl.store_dst <= (host_req.op == OP_STORE_DST);
              pe_ctrl.sram_base <= host_req.addr[9:0];
              settle            <= '0;
              state             <= S_COPY;
            end
            default: ;
          endcase
        end
        S_RUN: if (settle == 2'd3 && quiet && quiet_d) begin
          pe_ctrl.swap <= run_q.swap;
          state        <= S_IO;
        end
        S_COPY: if (settle == 2'd3 && !(|pe_busy)) begin
          state <= S_IO;
        end
        default: state <= S_IO;
      endcase
    end
  end

  assign host_rsp       = dma_rdata;
  assign host_rsp_valid = rsp_pend;

  assert property (@(posedge clk) disable iff (!rst_n) bcast_valid |-> !(|pe_full))
    else $error("ccu: broadcast into a full queue");

endmodule
