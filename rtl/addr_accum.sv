// addr_accum: the address accumulator of the arithmetic unit.
//
// Matrix entries store their row as a 4-bit count of zeros skipped since the
// previous stored entry of the same column (relative indexing). This unit
// restores the absolute local row: for the first entry of a column the row is
// the count itself, after that it is previous row + count + 1 (so counts 0,1,0
// give rows 0,2,3). addr is combinational from the inputs and the register
// holding the previous row, which is updated when en is high. It works in
// parallel with the codebook look-up in the first pipeline stage.
module addr_accum #(
  parameter int unsigned ADDR_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              first,
  input  logic [3:0]        rel,
  output logic [ADDR_W-1:0] addr
);

  logic [ADDR_W-1:0] prev;

  assign addr = first ? ADDR_W'(rel) : prev + ADDR_W'(rel) + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  prev <= '0;
    else if (en) prev <= addr;
  end

endmodule
