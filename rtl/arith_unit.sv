// arith_unit: the arithmetic unit of a PE, b_x = b_x + S[v] * a_j.
//
// Four pipeline stages per matrix entry, as in the paper:
//   1. codebook look-up (weight_decoder) and address accumulation (addr_accum)
//   2. destination activation read and multiply by the input activation
//   3. shift (fixed-point product back to Q7.8) and add
//   4. destination activation write
// Stage 2 of entry k overlaps stage 3 of entry k-1 and stage 4 of entry k-2,
// so two hazards are resolved by bypassing. If k-1 targets the same
// accumulator, the adder output is routed back to the adder input (the bypass
// drawn in the paper). If k-2 does, the value being written is forwarded into
// the stage-2 read (write-through). Entries arrive at most one per cycle and
// the pipeline never stalls. The 32-bit product is shifted right by FRAC_BITS
// and added with saturation to 16 bits; both the format and saturation are
// this design's choices. Only the low 6 bits of the row address index the 64
// destination registers. The destination register file itself lives in
// act_rw and is reached through rd_addr/rd_data (combinational read) and
// wr_en/wr_addr/wr_data.
module arith_unit
  import eie_pkg::*;
#(
  parameter int unsigned FRAC = FRAC_BITS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  entry_t            ent,
  input  logic              ent_valid,
  // codebook load
  input  logic              cb_we,
  input  logic [3:0]        cb_idx,
  input  data_t             cb_data,
  // destination register file
  output logic [REG_AW-1:0] rd_addr,
  input  data_t             rd_data,
  output logic              wr_en,
  output logic [REG_AW-1:0] wr_addr,
  output data_t             wr_data,
  output logic              busy
);

  // ---- stage 1: codebook look-up and address accumulation
  data_t       w1;
  logic [15:0] row1;

  weight_decoder u_codebook (
    .clk, .rst_n, .wr_en(cb_we), .wr_idx(cb_idx), .wr_data(cb_data), .idx(ent.v), .weight(w1));

  addr_accum #(.ADDR_W(16)) u_addr (
    .clk, .rst_n, .en(ent_valid), .first(ent.first), .rel(ent.x), .addr(row1));

  logic              s1_valid;
  data_t             s1_w, s1_a;
  logic [REG_AW-1:0] s1_row;

  // ---- stage 2 registers
  logic               s2_valid;
  logic signed [31:0] s2_prod;
  data_t              s2_old;
  logic [REG_AW-1:0]  s2_row;

  // ---- stage 3 registers (written back in stage 4)
  logic              s3_valid;
  data_t             s3_sum;
  logic [REG_AW-1:0] s3_row;

  // stage 2: read with write-through forwarding from the entry being written
  data_t              old2;
  logic signed [31:0] prod2;
  assign rd_addr = s1_row;
  assign old2    = (s3_valid && s3_row == s1_row) ? s3_sum : rd_data;
  assign prod2   = s1_w * s1_a;

  // stage 3: adder with bypass of its own previous output
  data_t              old3, sum3;
  logic signed [31:0] scaled;
  logic signed [32:0] wide;
  assign old3   = (s3_valid && s3_row == s2_row) ? s3_sum : s2_old;
  assign scaled = s2_prod >>> FRAC;
  assign wide   = 33'(scaled) + 33'(old3);
  always_comb begin
    if (wide > 33'sd32767)       sum3 = 16'sh7fff;
    else if (wide < -33'sd32768) sum3 = 16'sh8000;
    else                         sum3 = wide[15:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;  s1_w <= '0;  s1_a <= '0;  s1_row <= '0;
      s2_valid <= 1'b0;  s2_prod <= '0;  s2_old <= '0;  s2_row <= '0;
      s3_valid <= 1'b0;  s3_sum <= '0;  s3_row <= '0;
    end else begin
      s1_valid <= ent_valid;
      s1_w     <= w1;
      s1_a     <= ent.act;
      s1_row   <= row1[REG_AW-1:0];
      s2_valid <= s1_valid;
      s2_prod  <= prod2;
      s2_old   <= old2;
      s2_row   <= s1_row;
      s3_valid <= s2_valid;
      s3_sum   <= sum3;
      s3_row   <= s2_row;
    end
  end

  // stage 4: write back
  assign wr_en   = s3_valid;
  assign wr_addr = s3_row;
  assign wr_data = s3_sum;
  assign busy    = s1_valid || s2_valid || s3_valid;

endmodule
