// spmat_read_unit: the sparse-matrix read unit of a PE.
//
// Walks the entries p_j .. p_j+1-1 of the current column and hands one 8-bit
// (v, x) entry per cycle to the arithmetic unit. The sparse-matrix SRAM is
// 64 bits wide, so a row holds eight entries: the pointer's high bits select
// the row and its low 3 bits the entry (entry k in row bits [8k+7:8k], weight
// code v in the upper nibble, relative row index x in the lower one). The row
// last read stays in the SRAM output register ("Regs" in the PE diagram) and a
// new row is read only when the next pointer to be issued lies in another
// row, so in steady state the SRAM is read once every eight entries.
//
// Timing: the read address is computed from the next-cycle pointer, so the
// row needed in cycle t+1 is read in cycle t; rows and columns follow each
// other without bubbles. A column descriptor is taken (col_ready) when the
// unit is idle or is issuing the last entry of its column. Empty columns are
// dropped. ent_valid marks an entry; ent.first marks the first of a column.
// In I/O mode the master writes whole rows through dma_we/dma_addr/dma_wdata.
// Row/entry addressing and widths follow the paper; the look-ahead read is
// this design's.
module spmat_read_unit
  import eie_pkg::*;
#(
  parameter int unsigned SPMAT_ROWS = 8192,  // 13-bit row address, 64-bit rows
  localparam int unsigned RA_W = $clog2(SPMAT_ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  col_t            col,
  input  logic            col_valid,
  output logic            col_ready,
  output entry_t          ent,
  output logic            ent_valid,
  output logic            busy,
  input  logic            dma_we,
  input  logic [RA_W-1:0] dma_addr,
  input  logic [63:0]     dma_wdata
);

  logic             cur_valid, first;
  logic [PTR_W-1:0] p, stop;
  data_t            act;
  logic [RA_W-1:0]  rb_row;
  logic             rb_valid;
  logic [63:0]      row_q;

  logic             emit, last, take, load;
  logic             n_valid;
  logic [PTR_W-1:0] n_p;
  logic [RA_W-1:0]  n_row;
  logic             rd_en;

  assign emit      = cur_valid && rb_valid && (rb_row == RA_W'(p >> 3));
  assign last      = emit && (p + 1'b1 == stop);
  assign col_ready = !dma_we && (!cur_valid || last);
  assign take      = col_valid && col_ready;
  assign load      = take && (col.start != col.stop);

  // Pointer that will be current in the next cycle.
  always_comb begin
    n_valid = cur_valid;
    n_p     = p;
    if (load) begin
      n_valid = 1'b1;
      n_p     = col.start;
    end else if (last) begin
      n_valid = 1'b0;
    end else if (emit) begin
      n_p     = p + 1'b1;
    end
  end

  assign n_row = RA_W'(n_p >> 3);
  assign rd_en = !dma_we && n_valid && (!rb_valid || rb_row != n_row);

  sram_sp #(.WIDTH(64), .DEPTH(SPMAT_ROWS)) u_spmat (
    .clk, .en(rd_en || dma_we), .we(dma_we), .addr(dma_we ? dma_addr : n_row),
    .wdata(dma_wdata), .rdata(row_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_valid <= 1'b0;
      first     <= 1'b0;
      p         <= '0;
      stop      <= '0;
      act       <= '0;
      rb_row    <= '0;
      rb_valid  <= 1'b0;
    end else begin
      cur_valid <= n_valid;
      p         <= n_p;
      if (load) begin
        stop  <= col.stop;
        act   <= col.act;
        first <= 1'b1;
      end else if (emit) begin
        first <= 1'b0;
      end
      if (dma_we) begin
        rb_valid <= 1'b0;  // row contents may change
      end else if (rd_en) begin
        rb_valid <= 1'b1;
        rb_row   <= n_row;
      end
    end
  end

  logic [7:0] e8;
  assign e8        = row_q[{p[2:0], 3'b000} +: 8];
  assign ent.v     = e8[7:4];
  assign ent.x     = e8[3:0];
  assign ent.act   = act;
  assign ent.first = first;
  assign ent_valid = emit;
  assign busy      = cur_valid;

endmodule
