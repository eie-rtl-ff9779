// lnzd_node: leading non-zero detection node of the quadtree.
//
// Each node serves four children (PEs or lower nodes). It registers one offer
// per child (registers Act0..Act3 with occupancy flags s0..s3) and passes up
// the offer with the smallest column index. It only chooses once every child
// that is not done has an offer registered, so that if each child produces
// increasing indices the node's output is increasing too: the root then
// broadcasts the non-zero activations in column order. Child i is ready when
// its register is empty or being emptied. Handshakes are valid/ready; done
// says that a child (and everything below it) has nothing more to offer.
// The output is combinational from the registers, so each tree level adds one
// register stage. Four children per node and the register-plus-select
// structure follow the paper; ordering by index and the done wires are this
// design's.
module lnzd_node
  import eie_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  nz_t        in       [4],
  input  logic [3:0] in_valid,
  input  logic [3:0] in_done,
  output logic [3:0] in_ready,
  output nz_t        out,
  output logic       out_valid,
  input  logic       out_ready,
  output logic       out_done
);

  nz_t        act [4];
  logic [3:0] s;
  logic       all_known;
  logic [1:0] sel;
  logic       take;

  always_comb begin
    all_known = 1'b1;
    for (int i = 0; i < 4; i++) all_known &= s[i] || in_done[i];
  end

  always_comb begin
    sel = '0;
    for (int i = 3; i >= 0; i--) begin
      if (s[i] && (!s[sel] || act[i].index <= act[sel].index)) sel = 2'(i);
    end
  end

  assign out_valid = (|s) && all_known;
  assign out       = act[sel];
  assign take      = out_valid && out_ready;
  assign out_done  = (s == 4'b0) && (&in_done);

  always_comb begin
    for (int i = 0; i < 4; i++) in_ready[i] = !s[i] || (take && sel == 2'(i));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s <= '0;
      for (int i = 0; i < 4; i++) act[i] <= '0;
    end else begin
      for (int i = 0; i < 4; i++) begin
        if (in_valid[i] && in_ready[i]) begin
          s[i]   <= 1'b1;
          act[i] <= in[i];
        end else if (take && sel == 2'(i)) begin
          s[i] <= 1'b0;
        end
      end
    end
  end

endmodule
