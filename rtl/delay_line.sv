// delay_line: W-bit shift register of DEPTH stages (DEPTH >= 1).
//
// Used to line up the parallel branches of the feature extractor with the
// main path, so that every merge adds values of the same event. Data
// registers are not reset: the pipeline needs no initialisation, and the
// valid bit that travels with the main path marks which outputs belong to an
// event.
module delay_line #(
  parameter int W     = 8,
  parameter int DEPTH = 2
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  logic [W-1:0] r [DEPTH];

  always_ff @(posedge clk) begin
    r[0] <= d;
    for (int s = 1; s < DEPTH; s++) r[s] <= r[s-1];
  end

  assign q = r[DEPTH-1];

endmodule
