// weight_decoder: the shared-weight codebook of a PE.
//
// Weight sharing stores each matrix weight as a 4-bit code into a table of
// 16 shared values. This module holds that table in registers and expands a
// code to its 16-bit fixed-point weight combinationally (one table look-up,
// first pipeline stage of the arithmetic unit). The master loads entries in
// I/O mode (wr_en/wr_idx/wr_data, one per cycle). Code 0 always decodes to 0,
// whatever is written there: the CSC format inserts a zero-weight entry when a
// gap exceeds 15 rows, and this design reserves code 0 for it (the paper does
// not say which code is the zero). Entries reset to 0.
module weight_decoder
  import eie_pkg::*;
#(
  parameter int unsigned CODEBOOK_SIZE = 16
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             wr_en,
  input  logic [$clog2(CODEBOOK_SIZE)-1:0] wr_idx,
  input  data_t                            wr_data,
  input  logic [$clog2(CODEBOOK_SIZE)-1:0] idx,
  output data_t                            weight
);

  data_t table_q [CODEBOOK_SIZE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(CODEBOOK_SIZE); i++) table_q[i] <= '0;
    end else if (wr_en) begin
      table_q[wr_idx] <= wr_data;
    end
  end

  assign weight = (idx == '0) ? '0 : table_q[idx];

endmodule
