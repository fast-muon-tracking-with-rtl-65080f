// masked_linear: sparse N x N linear layer that carries the track state from
// one plate to the next.
//
// Output j may only draw on the inputs inside its search window, the band of
// 2*HALF+1 input positions centred on j+OFFSET:
//
//   y[j] = sum_{k=0}^{2*HALF} w[j][k] * x[j + OFFSET + k - HALF]
//
// Inputs beyond the ends of the plate count as zero. Weights outside the
// window are zero by construction and are neither stored nor multiplied, so
// only N*(2*HALF+1) multipliers exist; with HALF = 2 that is 250 of the 2500
// entries of a dense 50 x 50 kernel, a sparsity of 90 %. The layer has no bias.
// Products (2*FRAC fraction bits) are floored to the accumulator's FRAC+2
// fraction bits, summed with wrap-around and the sum truncated to an
// activation. Output is registered: one clock of
// latency, one vector per clock.
//
// Weight w[j][k] sits at register address j*(2*HALF+1)+k. The masked,
// bias-free 50 x 50 kernel and the ~90 % sparsity follow the paper, whose
// windows come from inter-plate hit correlations above 0.01; the band shape,
// HALF and OFFSET stand in for those correlation-derived windows and are this
// design's choice.
module masked_linear
  import mt_pkg::*;
#(
  parameter int N      = 50,
  parameter int HALF   = 2,
  parameter int OFFSET = 0,
  parameter int FRAC   = mt_pkg::FRAC_DEFAULT,
  localparam int DW    = DATA_I + FRAC,
  localparam int WW    = WGT_I + FRAC,
  localparam int AW    = ACC_I + FRAC + 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [CFG_AW-1:0]        cfg_addr,
  input  logic signed [CFG_DW-1:0] cfg_data,
  input  logic                     in_valid,
  input  logic signed [DW-1:0]     x [N],
  output logic                     out_valid,
  output logic signed [DW-1:0]     y [N]
);

  localparam int WIN = 2*HALF + 1;

  logic signed [WW-1:0] w [N][WIN];

  always_ff @(posedge clk)
    if (cfg_we)
      for (int j = 0; j < N; j++)
        for (int k = 0; k < WIN; k++)
          if (cfg_addr == CFG_AW'(j*WIN + k)) w[j][k] <= WW'(cfg_data);

  logic signed [DW-1:0] y_d [N];

  always_comb begin
    for (int j = 0; j < N; j++) begin
      logic signed [AW-1:0] acc;
      acc = '0;
      for (int k = 0; k < WIN; k++) begin
        int i;
        i = j + OFFSET + k - HALF;
        if (i >= 0 && i < N) begin
          logic signed [DW+WW-1:0] prod;
          prod = x[i] * w[j][k];
          acc  = acc + AW'(prod >>> (FRAC - 2));
        end
      end
      acc    = acc >>> 2;
      y_d[j] = DW'(acc);
    end
  end

  always_ff @(posedge clk) y <= y_d;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

endmodule
