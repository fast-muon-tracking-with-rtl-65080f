// mnn_tracker: multistage neural network for muon tracking, top level.
//
// The detector is three thin-gap-chamber plates, M1 with three gas gaps and
// M2 and M3 with two each, every gap read out as 50 one-bit channels. For
// each bunch crossing the 350 hit bits enter together and the network returns
// the polar angle theta of the muon track as an unsigned fixed-point number
// (9 integer, 7 fraction bits). Inside, a feature extractor follows the track
// from plate to plate (feature_extraction) and a four-layer perceptron maps
// the resulting 50-value state to theta (fully_connected). The arithmetic has
// FRAC fraction bits and FRAC+2 in accumulators; the default FRAC = 7 is the
// QF7 quantisation, FRAC = 5 and 3 give QF5 and QF3.
//
// Timing: fully pipelined, one event per clock at 160 MHz, no stall and no
// initialisation between events. The latency from in_valid to out_valid is
// 11 clocks = 68.75 ns: one input register, 6 clocks of feature extraction
// and 4 of the perceptron. out_valid is in_valid delayed by exactly 11.
//
// Configuration: the trained weights are written one at a time through
// cfg_we/cfg_addr/cfg_data; cfg_addr[15:12] names the layer (mt_pkg::layer_e)
// and cfg_addr[11:0] the register inside it. Writes while events flow change
// the weights from the next clock on.
//
// The network structure, sizes, quantisation, throughput and latency follow
// the paper; the stage split, the integer widths, the tanh table and the
// weight-loading port are this design's choices.
module mnn_tracker
  import mt_pkg::*;
#(
  parameter int FRAC = mt_pkg::FRAC_DEFAULT,
  localparam int DW  = DATA_I + FRAC
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cfg_we,
  input  logic [15:0]                 cfg_addr,
  input  logic signed [CFG_DW-1:0]    cfg_data,
  input  logic                        in_valid,
  input  logic [NCH-1:0][GAPS_M1-1:0] hits_m1,
  input  logic [NCH-1:0][GAPS_M2-1:0] hits_m2,
  input  logic [NCH-1:0][GAPS_M3-1:0] hits_m3,
  output logic                        out_valid,
  output theta_t                      theta
);

  localparam int LATENCY = 11;

  // ---- input register ----------------------------------------------------
  logic                        v_in;
  logic [NCH-1:0][GAPS_M1-1:0] m1_q;
  logic [NCH-1:0][GAPS_M2-1:0] m2_q;
  logic [NCH-1:0][GAPS_M3-1:0] m3_q;

  always_ff @(posedge clk) begin
    m1_q <= hits_m1;
    m2_q <= hits_m2;
    m3_q <= hits_m3;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v_in <= 1'b0;
    else        v_in <= in_valid;

  // ---- configuration decode ---------------------------------------------
  layer_e layer;
  logic   fe_we, fc_we;
  logic [2:0] fe_sel;
  logic [1:0] fc_sel;

  always_comb begin
    layer  = layer_e'(cfg_addr[15:12]);
    fe_we  = cfg_we && (layer <= L_ML_23);
    fc_we  = cfg_we && (layer >= L_FC1) && (layer <= L_FC4);
    fe_sel = cfg_addr[14:12];
    fc_sel = 2'(cfg_addr[15:12] - 4'(L_FC1));
  end

  // ---- network -------------------------------------------------------------
  logic  v_feat;
  logic signed [DW-1:0] feat [NCH];

  feature_extraction #(.FRAC(FRAC)) u_fe (
    .clk, .rst_n, .cfg_we(fe_we), .cfg_sel(fe_sel),
    .cfg_addr(cfg_addr[CFG_AW-1:0]), .cfg_data,
    .in_valid(v_in), .hits_m1(m1_q), .hits_m2(m2_q), .hits_m3(m3_q),
    .out_valid(v_feat), .feat);

  fully_connected #(.FRAC(FRAC)) u_fc (
    .clk, .rst_n, .cfg_we(fc_we), .cfg_sel(fc_sel),
    .cfg_addr(cfg_addr[CFG_AW-1:0]), .cfg_data,
    .in_valid(v_feat), .x(feat), .out_valid, .theta);

  // The pipeline never stalls: every event leaves exactly LATENCY clocks
  // after it entered, and no result appears without an event. v_hist only
  // serves this check.
  logic [LATENCY-1:0] v_hist;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v_hist <= '0;
    else        v_hist <= {v_hist[LATENCY-2:0], in_valid};

  a_fixed_latency: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid == v_hist[LATENCY-1]);

endmodule
