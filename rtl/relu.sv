// relu: rectified linear unit, y = max(x, 0), on one signed fixed-point
// activation. Combinational. In the PE it sits between the source activation
// registers and the non-zero detector, so the previous layer's raw sums are
// rectified on their way to the broadcast and negative results count as zeros.
module relu #(
  parameter int unsigned DATA_W = 16
) (
  input  logic signed [DATA_W-1:0] x,
  output logic signed [DATA_W-1:0] y
);

  assign y = x[DATA_W-1] ? '0 : x;

endmodule
