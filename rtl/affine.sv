// affine: fully connected layer y = W x + b, fully parallel.
//
// All N_OUT x N_IN products are formed in the same clock (a reuse factor of
// one), each cast to the accumulator format (FRAC+2 fraction bits, floor),
// summed with the bias and wrapped at ACC_W bits. The sum is truncated to
// OUT_FRAC fraction bits and wrapped to OUT_W bits. Hidden layers keep the
// activation format (OUT_FRAC = FRAC); the output layer uses OUT_W = 16 and
// OUT_FRAC = 7, read as an unsigned number with 9 integer and 7 fraction
// bits, whatever FRAC is. FRAC must be at least 2. Output is registered: one clock of
// latency, one vector per clock.
//
// Weight W[o][i] sits at register address o*N_IN + i, bias b[o] at
// N_OUT*N_IN + o. Layer sizes, the parallel evaluation and the output-layer
// format follow the paper; the casting order, the integer widths and the
// weight registers are this design's choices.
module affine
  import mt_pkg::*;
#(
  parameter int N_IN     = 50,
  parameter int N_OUT    = 28,
  parameter int FRAC     = mt_pkg::FRAC_DEFAULT,
  parameter int OUT_W    = DATA_I + FRAC,
  parameter int OUT_FRAC = FRAC,
  localparam int DW      = DATA_I + FRAC,
  localparam int WW      = WGT_I + FRAC,
  localparam int BW      = BIAS_I + FRAC,
  localparam int AW      = ACC_I + FRAC + 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [CFG_AW-1:0]        cfg_addr,
  input  logic signed [CFG_DW-1:0] cfg_data,
  input  logic                     in_valid,
  input  logic signed [DW-1:0]     x [N_IN],
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  y [N_OUT]
);

  logic signed [WW-1:0] w [N_OUT][N_IN];
  logic signed [BW-1:0] b [N_OUT];

  always_ff @(posedge clk)
    if (cfg_we)
      for (int o = 0; o < N_OUT; o++) begin
        for (int i = 0; i < N_IN; i++)
          if (cfg_addr == CFG_AW'(o*N_IN + i)) w[o][i] <= WW'(cfg_data);
        if (cfg_addr == CFG_AW'(N_OUT*N_IN + o)) b[o] <= BW'(cfg_data);
      end

  logic signed [OUT_W-1:0] y_d [N_OUT];

  always_comb
    for (int o = 0; o < N_OUT; o++) begin
      logic signed [AW-1:0] acc;
      acc = AW'(b[o]) <<< 2;
      for (int i = 0; i < N_IN; i++) begin
        logic signed [DW+WW-1:0] prod;
        prod = x[i] * w[o][i];
        acc  = acc + AW'(prod >>> (FRAC - 2));
      end
      // Accumulator (FRAC+2 fraction bits) to the output's OUT_FRAC.
      if (FRAC + 2 >= OUT_FRAC) y_d[o] = OUT_W'(acc >>> (FRAC + 2 - OUT_FRAC));
      else                      y_d[o] = OUT_W'(acc) <<< (OUT_FRAC - FRAC - 2);
    end

  always_ff @(posedge clk) y <= y_d;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

endmodule
