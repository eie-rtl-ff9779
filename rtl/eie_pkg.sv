// eie_pkg: types and constants shared by the EIE sparse matrix-vector engine.
//
// The engine computes b = W*a for a pruned, weight-shared fully-connected layer.
// Non-zero input activations travel as (value, column index) pairs (nz_t); a PE
// turns each pair into a column descriptor (col_t: start/end pointer plus the
// activation) and then into one (v, x) matrix entry per cycle (entry_t).
// Widths follow the paper where it gives them: 16-bit fixed-point data, 16-bit
// pointers, 4-bit weight codes and 4-bit relative row indices. The host command
// encoding (host_op_e, host_req_t) and the fixed-point format (Q7.8) are this
// design's own choices.
package eie_pkg;

  localparam int DATA_W    = 16;  // activation and weight width (16-bit fixed point)
  localparam int IDX_W     = 16;  // column index width of a broadcast activation
  localparam int PTR_W     = 16;  // CSC pointer width
  localparam int FRAC_BITS = 8;   // binary point position (Q7.8), assumed
  localparam int REGS      = 64;  // activations per register file
  localparam int REG_AW    = 6;

  typedef logic signed [DATA_W-1:0] data_t;

  // Non-zero activation offered by the detectors and broadcast by the CCU.
  typedef struct packed {
    data_t            value;
    logic [IDX_W-1:0] index;
  } nz_t;

  // Column descriptor: walk matrix entries [start, stop) multiplying by act.
  typedef struct packed {
    logic [PTR_W-1:0] start;
    logic [PTR_W-1:0] stop;
    data_t            act;
  } col_t;

  // One encoded matrix entry on its way to the arithmetic unit.
  typedef struct packed {
    logic [3:0] v;      // weight code into the 16-entry codebook
    logic [3:0] x;      // zeros skipped since the previous entry of this column
    data_t      act;    // activation a_j this entry is multiplied by
    logic       first;  // first entry of its column (restarts the row sum)
  } entry_t;

  // Targets of a DMA access inside a PE.
  typedef enum logic [2:0] {
    T_SPMAT    = 3'd0,  // sparse-matrix SRAM row (64 bit)
    T_PTR      = 3'd1,  // pointer SRAM entry (16 bit), bank chosen by address LSB
    T_CODEBOOK = 3'd2,  // shared-weight table entry
    T_SRC      = 3'd3,  // source activation register
    T_DST      = 3'd4,  // destination activation register
    T_SRAM     = 3'd5   // activation SRAM word
  } dma_target_e;

  // Host (master) operations accepted by the CCU.
  typedef enum logic [2:0] {
    OP_WRITE     = 3'd0,  // I/O mode: write wdata to target/addr of PE pe
    OP_READ      = 3'd1,  // I/O mode: read target/addr of PE pe, answered on host_rsp
    OP_RUN       = 3'd2,  // Computing mode: one M x V pass (see run_cmd_t in wdata)
    OP_LOAD_SRC  = 3'd3,  // every PE: source registers <- Act SRAM[addr +: 64]
    OP_STORE_DST = 3'd4   // every PE: Act SRAM[addr +: 64] <- destination registers
  } host_op_e;

  typedef struct packed {
    host_op_e    op;
    logic [7:0]  pe;
    dma_target_e target;
    logic [15:0] addr;
    logic [63:0] wdata;
  } host_req_t;

  // Layout of wdata for OP_RUN.
  typedef struct packed {
    logic [29:0]      unused;
    logic             swap;       // exchange source/destination roles at the end
    logic             clear_dst;  // zero the accumulators first
    logic [PTR_W-1:0] ptr_base;   // start address of this pass's pointer array
    logic [15:0]      len;        // input length of this pass (columns 0..len-1)
  } run_cmd_t;

  // DMA access as seen by every PE (each PE matches pe against its own id).
  typedef struct packed {
    logic        we;
    logic        re;
    logic [7:0]  pe;
    dma_target_e target;
    logic [15:0] addr;
    logic [63:0] wdata;
  } dma_req_t;

  // Layer control distributed by the CCU to every PE.
  typedef struct packed {
    logic             start;      // pulse: start scanning and computing a pass
    logic             clear_dst;  // pulse: zero the destination registers
    logic             swap;       // pulse: exchange source/destination roles
    logic             load_src;   // pulse: copy Act SRAM -> source registers
    logic             store_dst;  // pulse: copy destination registers -> Act SRAM
    logic [9:0]       sram_base;
    logic [15:0]      len;
    logic [PTR_W-1:0] ptr_base;
  } pe_ctrl_t;

endpackage
