// conv1d_hit: one-filter 1-D convolution over the hit bits of one plate.
//
// The plate has N readout channels in each of C gas gaps. The gaps are the
// input channels of the convolution and the filter slides along the N
// channel positions with zero ("same") padding, so N features come out:
//
//   y[p] = b + sum_{k<K} sum_{c<C} w[k][c] * hits[p+k-K/2][c]
//
// Because a hit is a single bit, every product is either the weight or zero
// and the layer needs no multiplier. The sum is kept in the accumulator
// format (FRAC+2 fraction bits) and cast to an activation by truncation
// and wrap-around. FRAC sets the fraction bits (7 for the QF7 network).
// Output is registered: y and out_valid follow in_valid by
// one clock; a new event is accepted every clock.
//
// Weights and bias sit in registers written through cfg_we/cfg_addr/cfg_data:
// address k*C + c holds w[k][c], address K*C holds b. The filter size, the
// channel counts and the single filter follow the paper's network drawing;
// the padding, the bias, the number formats and the weight registers are
// this design's choices. Reset clears only out_valid; the network needs no
// initialisation between events.
module conv1d_hit
  import mt_pkg::*;
#(
  parameter int N    = 50,
  parameter int C    = 3,
  parameter int K    = 3,
  parameter int FRAC = mt_pkg::FRAC_DEFAULT,
  localparam int DW  = DATA_I + FRAC,
  localparam int WW  = WGT_I + FRAC,
  localparam int BW  = BIAS_I + FRAC,
  localparam int AW  = ACC_I + FRAC + 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [CFG_AW-1:0]        cfg_addr,
  input  logic signed [CFG_DW-1:0] cfg_data,
  input  logic                     in_valid,
  input  logic [N-1:0][C-1:0]      hits,
  output logic                     out_valid,
  output logic signed [DW-1:0]     y [N]
);

  logic signed [WW-1:0] w [K][C];
  logic signed [BW-1:0] b;

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      for (int k = 0; k < K; k++)
        for (int c = 0; c < C; c++)
          if (cfg_addr == CFG_AW'(k*C + c)) w[k][c] <= WW'(cfg_data);
      if (cfg_addr == CFG_AW'(K*C)) b <= BW'(cfg_data);
    end
  end

  logic signed [DW-1:0] y_d [N];

  always_comb begin
    for (int p = 0; p < N; p++) begin
      logic signed [AW-1:0] acc;
      acc = AW'(b) <<< 2;
      for (int k = 0; k < K; k++) begin
        int q;
        q = p + k - K/2;
        if (q >= 0 && q < N)
          for (int c = 0; c < C; c++)
            if (hits[q][c]) acc = acc + (AW'(w[k][c]) <<< 2);
      end
      acc    = acc >>> 2;
      y_d[p] = DW'(acc);
    end
  end

  always_ff @(posedge clk) y <= y_d;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

endmodule
