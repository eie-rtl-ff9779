// sram_sp: single-ported synchronous SRAM, one access per cycle.
//
// Stands in for the compiled SRAM macros of a PE: the two pointer banks, the
// 64-bit-wide sparse-matrix SRAM and the activation SRAM. A read (en=1, we=0)
// returns mem[addr] on rdata in the next cycle; rdata then holds until the next
// read. A write (en=1, we=1) stores wdata and leaves rdata unchanged. The
// paper fixes only that the arrays are single-ported; the one-cycle registered
// read is this design's choice. Contents are not reset, as in a real SRAM.
module sram_sp #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
