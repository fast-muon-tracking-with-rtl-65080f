// feature_extraction: track-following feature extractor of the multistage
// network.
//
// Each plate's hits go through their own one-filter convolution, giving an
// "observation" vector of 50 values that encodes where the plate was hit.
// Tracking runs inside-out:
//
//   s1 = tanh(conv_M1(hits_m1))                      state after M1
//   s2 = tanh(ML_12(s1) + conv_M2(hits_m2))          state after M2
//   s3 = tanh(ML_13(s1) + ML_23(s2) + conv_M3(hits_m3))  state after M3
//
// The masked linear layers (ML) project a state onto the next plate through
// narrow search windows; adding the projection to the observation and
// squashing with tanh favours tracks with hits on more plates while still
// tolerating a missing hit. s3 is the output.
//
// Timing: a fully pipelined datapath taking one event per clock with a fixed
// latency of 6 clocks from in_valid to out_valid. The M1 path is conv (1),
// tanh (1), ML_12 (1), add+tanh (1), ML_23 (1), add+tanh (1). The M2 and M3
// hits are delayed by 2 and 4 clocks before their convolutions, and the
// ML_13 projection by 2 clocks, so that every adder sums values of one event.
//
// Weights are written through cfg_we/cfg_addr/cfg_data with cfg_sel picking
// the layer: 0 conv M1, 1 conv M2, 2 conv M3, 3 ML_13, 4 ML_12, 5 ML_23. The
// layers, their sizes and their connections follow the paper's network
// drawing; the stage split, the delays and the weight port are this design's.
module feature_extraction
  import mt_pkg::*;
#(
  parameter int FRAC = mt_pkg::FRAC_DEFAULT,
  localparam int DW  = DATA_I + FRAC
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cfg_we,
  input  logic [2:0]                 cfg_sel,
  input  logic [CFG_AW-1:0]          cfg_addr,
  input  logic signed [CFG_DW-1:0]   cfg_data,
  input  logic                       in_valid,
  input  logic [NCH-1:0][GAPS_M1-1:0] hits_m1,
  input  logic [NCH-1:0][GAPS_M2-1:0] hits_m2,
  input  logic [NCH-1:0][GAPS_M3-1:0] hits_m3,
  output logic                       out_valid,
  output logic signed [DW-1:0]                      feat [NCH]
);

  localparam int N = NCH;

  logic [5:0] we;
  always_comb
    for (int l = 0; l < 6; l++) we[l] = cfg_we && (cfg_sel == 3'(l));

  // ---- plate M1: observation and first state -----------------------------
  logic  v_c1, v_s1, v_p1, v_s2, v_p2;
  logic signed [DW-1:0] c1 [N];
  logic signed [DW-1:0] s1 [N];

  conv1d_hit #(.FRAC(FRAC), .N(N), .C(GAPS_M1), .K(3)) u_conv_m1 (
    .clk, .rst_n, .cfg_we(we[0]), .cfg_addr, .cfg_data,
    .in_valid, .hits(hits_m1), .out_valid(v_c1), .y(c1));

  tanh_lut #(.FRAC(FRAC), .N(N)) u_tanh_m1 (
    .clk, .rst_n, .in_valid(v_c1), .x(c1), .out_valid(v_s1), .y(s1));

  // ---- projections of the M1 state --------------------------------------
  logic signed [DW-1:0] p13 [N];
  logic signed [DW-1:0] p12 [N];
  logic  v_p13_unused;

  masked_linear #(.FRAC(FRAC), .N(N)) u_ml_13 (
    .clk, .rst_n, .cfg_we(we[3]), .cfg_addr, .cfg_data,
    .in_valid(v_s1), .x(s1), .out_valid(v_p13_unused), .y(p13));

  masked_linear #(.FRAC(FRAC), .N(N)) u_ml_12 (
    .clk, .rst_n, .cfg_we(we[4]), .cfg_addr, .cfg_data,
    .in_valid(v_s1), .x(s1), .out_valid(v_p1), .y(p12));

  // ---- plate M2: hits delayed 2 clocks, convolution, merge --------------
  logic [N-1:0][GAPS_M2-1:0] hits_m2_d;
  logic signed [DW-1:0] c2 [N];
  logic  v_c2_unused;

  delay_line #(.W(N*GAPS_M2), .DEPTH(2)) u_dly_m2 (
    .clk, .d(hits_m2), .q(hits_m2_d));

  conv1d_hit #(.FRAC(FRAC), .N(N), .C(GAPS_M2), .K(3)) u_conv_m2 (
    .clk, .rst_n, .cfg_we(we[1]), .cfg_addr, .cfg_data,
    .in_valid(1'b0), .hits(hits_m2_d), .out_valid(v_c2_unused), .y(c2));

  logic signed [DW-1:0] add2_in [2][N];
  logic signed [DW-1:0] sum2 [N];
  logic signed [DW-1:0] s2 [N];

  always_comb
    for (int i = 0; i < N; i++) begin
      add2_in[0][i] = p12[i];
      add2_in[1][i] = c2[i];
    end

  vec_add #(.FRAC(FRAC), .N(N), .M(2)) u_add_m2 (.a(add2_in), .y(sum2));

  tanh_lut #(.FRAC(FRAC), .N(N)) u_tanh_m2 (
    .clk, .rst_n, .in_valid(v_p1), .x(sum2), .out_valid(v_s2), .y(s2));

  logic signed [DW-1:0] p23 [N];

  masked_linear #(.FRAC(FRAC), .N(N)) u_ml_23 (
    .clk, .rst_n, .cfg_we(we[5]), .cfg_addr, .cfg_data,
    .in_valid(v_s2), .x(s2), .out_valid(v_p2), .y(p23));

  // ---- plate M3: hits delayed 4 clocks, M1 projection delayed 2 ---------
  logic [N-1:0][GAPS_M3-1:0] hits_m3_d;
  logic signed [DW-1:0] c3 [N];
  logic  v_c3_unused;

  delay_line #(.W(N*GAPS_M3), .DEPTH(4)) u_dly_m3 (
    .clk, .d(hits_m3), .q(hits_m3_d));

  conv1d_hit #(.FRAC(FRAC), .N(N), .C(GAPS_M3), .K(3)) u_conv_m3 (
    .clk, .rst_n, .cfg_we(we[2]), .cfg_addr, .cfg_data,
    .in_valid(1'b0), .hits(hits_m3_d), .out_valid(v_c3_unused), .y(c3));

  logic [N*DW-1:0] p13_flat, p13_flat_d;
  logic signed [DW-1:0] p13_d [N];

  always_comb
    for (int i = 0; i < N; i++) begin
      p13_flat[i*DW +: DW] = p13[i];
      p13_d[i] = DW'(p13_flat_d[i*DW +: DW]);
    end

  delay_line #(.W(N*DW), .DEPTH(2)) u_dly_p13 (
    .clk, .d(p13_flat), .q(p13_flat_d));

  logic signed [DW-1:0] add3_in [3][N];
  logic signed [DW-1:0] sum3 [N];

  always_comb
    for (int i = 0; i < N; i++) begin
      add3_in[0][i] = p13_d[i];
      add3_in[1][i] = p23[i];
      add3_in[2][i] = c3[i];
    end

  vec_add #(.FRAC(FRAC), .N(N), .M(3)) u_add_m3 (.a(add3_in), .y(sum3));

  tanh_lut #(.FRAC(FRAC), .N(N)) u_tanh_m3 (
    .clk, .rst_n, .in_valid(v_p2), .x(sum3), .out_valid(out_valid), .y(feat));

endmodule
