// relu_vec: element-wise rectified linear unit, y[i] = max(0, x[i]).
//
// It sits between the affine layers of the fully connected part of the
// network. Negative activations (sign bit set) become zero, the others pass
// unchanged. Purely combinational; the affine layer that follows registers.
module relu_vec
  import mt_pkg::*;
#(
  parameter int N    = 28,
  parameter int FRAC = mt_pkg::FRAC_DEFAULT,
  localparam int DW  = DATA_I + FRAC
) (
  input  logic signed [DW-1:0] x [N],
  output logic signed [DW-1:0] y [N]
);

  always_comb
    for (int i = 0; i < N; i++) y[i] = x[i][DW-1] ? '0 : x[i];

endmodule
