// pe_nzdetect: the leading non-zero detector of one PE.
//
// PE k holds input activations a_j with j mod N_PE == k, local register l
// holding j = l*N_PE + k. For a pass over an input of length len this PE owns
// local_len = ceil((len - k) / N_PE) of them. After start, the detector offers
// every non-zero (after ReLU) activation of that range to its LNZD node in
// increasing l, as (value, global index j), one offer per cycle at most. At
// start it captures a mask of the non-zero registers in range and then walks
// it with a priority encoder over all 64 registers, so zeros cost no cycles.
// Between passes the mask is empty, so a role swap offers nothing. done is high when nothing is left to
// offer (and before the first start). The offer sits in an output register
// (out_valid/out_ready handshake). The source file must not change during a
// pass. Offering only non-zero activations is the paper's mechanism; the mask
// and priority encoder are this design's.
module pe_nzdetect
  import eie_pkg::*;
#(
  parameter int unsigned N_PE  = 64,
  parameter int unsigned PE_ID = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] len,
  input  data_t       src_vec [REGS],
  output nz_t         out,
  output logic        out_valid,
  input  logic        out_ready,
  output logic        done
);

  localparam int unsigned SH = $clog2(N_PE);

  data_t       r [REGS];
  logic [REGS-1:0] nonzero, pending;
  logic [16:0] local_len;
  logic        any;
  logic [REG_AW-1:0] sel;

  for (genvar i = 0; i < REGS; i++) begin : g_relu
    relu #(.DATA_W(DATA_W)) u_relu (.x(src_vec[i]), .y(r[i]));
    assign nonzero[i] = (r[i] != '0);
  end

  // number of this PE's activations below len (saturated at REGS)
  always_comb begin
    if (len > 16'(PE_ID)) local_len = 17'(((len - 16'(PE_ID) - 16'd1) >> SH) + 16'd1);
    else                  local_len = '0;
  end

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int i = REGS - 1; i >= 0; i--) begin
      if (pending[i]) begin
        any = 1'b1;
        sel = REG_AW'(i);
      end
    end
  end

  logic advance;
  assign advance = any && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending   <= '0;
      out_valid <= 1'b0;
      out       <= '0;
    end else if (start) begin
      for (int i = 0; i < REGS; i++) pending[i] <= nonzero[i] && (17'(i) < local_len);
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (advance) begin
        out_valid   <= 1'b1;
        out.value   <= r[sel];
        out.index   <= IDX_W'((32'(sel) << SH) + PE_ID);
        pending[sel] <= 1'b0;
      end
    end
  end

  assign done = !any && !out_valid;

endmodule
