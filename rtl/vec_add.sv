// vec_add: element-wise sum of M activation vectors of width N.
//
// This is the merge point of the track-following network: the track state
// projected from the previous plates is added to the current plate's
// observation, y[i] = a[0][i] + ... + a[M-1][i]. The sum wraps around in the
// activation format. The block is purely combinational; the tanh table that
// follows it registers the result. M is 2 for the merge at plate M2 and 3 for
// the merge at plate M3, as in the paper's network; the wrap-around follows
// the paper's overflow mode.
module vec_add
  import mt_pkg::*;
#(
  parameter int N    = 50,
  parameter int M    = 2,
  parameter int FRAC = mt_pkg::FRAC_DEFAULT,
  localparam int DW  = DATA_I + FRAC
) (
  input  logic signed [DW-1:0] a [M][N],
  output logic signed [DW-1:0] y [N]
);

  always_comb
    for (int i = 0; i < N; i++) begin
      logic signed [DW-1:0] s;
      s = '0;
      for (int m = 0; m < M; m++) s = s + a[m][i];
      y[i] = s;
    end

endmodule
