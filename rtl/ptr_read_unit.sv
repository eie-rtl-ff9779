// ptr_read_unit: the pointer read unit of a PE.
//
// For the column index j at the head of the activation queue it fetches the
// CSC pointers p_j and p_j+1 (start and end of this PE's slice of column j in
// the sparse-matrix SRAM) in a single cycle. As in the paper, the pointer
// array is split over two single-ported banks by the address LSB, so two
// consecutive pointers always sit in different banks: for an even address a
// both come from row a/2 (even bank p_j, odd bank p_j+1); for an odd address
// p_j comes from the odd bank row a/2 and p_j+1 from the even bank row a/2+1.
// The pointer address is ptr_base + j, ptr_base being the start of the
// current layer's pointer array.
//
// Timing: the head entry is popped and both banks are read in cycle t; the
// column descriptor (start, stop, activation) is valid from cycle t+1 and held
// until col_ready. A new entry is popped only when no read is outstanding and
// the descriptor register is free or being taken, so at most one column every
// two cycles (a column takes several cycles of the arithmetic unit anyway).
// In I/O mode the master writes pointers through dma_we/dma_addr/dma_wdata.
// Bank split and widths follow the paper; the handshake is this design's.
module ptr_read_unit
  import eie_pkg::*;
#(
  parameter int unsigned PTR_ENTRIES = 16384,  // 32KB of 16-bit pointers
  localparam int unsigned PA_W = $clog2(PTR_ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  // activation queue head
  input  logic             q_empty,
  input  nz_t              q_head,
  output logic             q_pop,
  // layer setting
  input  logic [PTR_W-1:0] ptr_base,
  // column descriptor to the sparse-matrix read unit
  output col_t             col,
  output logic             col_valid,
  input  logic             col_ready,
  output logic             busy,
  // I/O-mode pointer write
  input  logic             dma_we,
  input  logic [PA_W-1:0]  dma_addr,
  input  logic [PTR_W-1:0] dma_wdata
);

  localparam int unsigned BANK_DEPTH = PTR_ENTRIES / 2;
  localparam int unsigned BA_W       = PA_W - 1;

  logic [PA_W-1:0]  addr;
  logic [BA_W-1:0]  even_addr, odd_addr;
  logic             even_en, odd_en, even_we, odd_we;
  logic [PTR_W-1:0] even_q, odd_q;
  logic             inflight, odd_r;
  data_t            act_r;

  assign q_pop = !q_empty && !inflight && (!col_valid || col_ready) && !dma_we;
  assign addr  = PA_W'(ptr_base) + PA_W'(q_head.index);

  always_comb begin
    if (dma_we) begin
      even_we   = !dma_addr[0];
      odd_we    =  dma_addr[0];
      even_en   = !dma_addr[0];
      odd_en    =  dma_addr[0];
      even_addr = dma_addr[PA_W-1:1];
      odd_addr  = dma_addr[PA_W-1:1];
    end else begin
      even_we   = 1'b0;
      odd_we    = 1'b0;
      even_en   = q_pop;
      odd_en    = q_pop;
      odd_addr  = addr[PA_W-1:1];
      even_addr = addr[PA_W-1:1] + BA_W'(addr[0]);
    end
  end

  sram_sp #(.WIDTH(PTR_W), .DEPTH(BANK_DEPTH)) u_even_bank (
    .clk, .en(even_en), .we(even_we), .addr(even_addr), .wdata(dma_wdata), .rdata(even_q));
  sram_sp #(.WIDTH(PTR_W), .DEPTH(BANK_DEPTH)) u_odd_bank (
    .clk, .en(odd_en), .we(odd_we), .addr(odd_addr), .wdata(dma_wdata), .rdata(odd_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inflight  <= 1'b0;
      col_valid <= 1'b0;
      odd_r     <= 1'b0;
      act_r     <= '0;
    end else begin
      inflight <= q_pop;
      if (q_pop) begin
        odd_r <= addr[0];
        act_r <= q_head.value;
      end
      if (inflight)       col_valid <= 1'b1;
      else if (col_ready) col_valid <= 1'b0;
    end
  end

  // The bank outputs hold their value until the next read, which is only
  // issued once this descriptor has been taken.
  assign col.start = odd_r ? odd_q  : even_q;
  assign col.stop  = odd_r ? even_q : odd_q;
  assign col.act   = act_r;
  assign busy      = inflight || col_valid;

endmodule
