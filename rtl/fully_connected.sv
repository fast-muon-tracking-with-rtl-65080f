// fully_connected: the multilayer perceptron that turns the 50-value track
// state into the track angle theta.
//
//   Affine 50->28, ReLU, Affine 28->14, ReLU, Affine 14->8, ReLU, Affine 8->1
//
// Each affine layer registers its output, the ReLUs are combinational, so the
// latency is 4 clocks from in_valid to out_valid, one event per clock. theta
// is the output layer's 16-bit result read as an unsigned fixed-point number
// with 9 integer and 7 fraction bits.
//
// cfg_sel picks the layer a weight write goes to (0..3 = first..last affine).
// Layer sizes, activations and the output format follow the paper.
module fully_connected
  import mt_pkg::*;
#(
  parameter int FRAC = mt_pkg::FRAC_DEFAULT,
  localparam int DW  = DATA_I + FRAC
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [1:0]               cfg_sel,
  input  logic [CFG_AW-1:0]        cfg_addr,
  input  logic signed [CFG_DW-1:0] cfg_data,
  input  logic                     in_valid,
  input  logic signed [DW-1:0]                    x [NCH],
  output logic                     out_valid,
  output theta_t                   theta
);

  localparam int H1 = 28;
  localparam int H2 = 14;
  localparam int H3 = 8;

  logic [3:0] we;
  always_comb
    for (int l = 0; l < 4; l++) we[l] = cfg_we && (cfg_sel == 2'(l));

  logic  v1, v2, v3;
  logic signed [DW-1:0] h1 [H1];
  logic signed [DW-1:0] r1 [H1];
  logic signed [DW-1:0] h2 [H2];
  logic signed [DW-1:0] r2 [H2];
  logic signed [DW-1:0] h3 [H3];
  logic signed [DW-1:0] r3 [H3];
  logic signed [THETA_W-1:0] out [1];

  affine #(.FRAC(FRAC), .N_IN(NCH), .N_OUT(H1)) u_fc1 (
    .clk, .rst_n, .cfg_we(we[0]), .cfg_addr, .cfg_data,
    .in_valid, .x, .out_valid(v1), .y(h1));

  relu_vec #(.FRAC(FRAC), .N(H1)) u_relu1 (.x(h1), .y(r1));

  affine #(.FRAC(FRAC), .N_IN(H1), .N_OUT(H2)) u_fc2 (
    .clk, .rst_n, .cfg_we(we[1]), .cfg_addr, .cfg_data,
    .in_valid(v1), .x(r1), .out_valid(v2), .y(h2));

  relu_vec #(.FRAC(FRAC), .N(H2)) u_relu2 (.x(h2), .y(r2));

  affine #(.FRAC(FRAC), .N_IN(H2), .N_OUT(H3)) u_fc3 (
    .clk, .rst_n, .cfg_we(we[2]), .cfg_addr, .cfg_data,
    .in_valid(v2), .x(r2), .out_valid(v3), .y(h3));

  relu_vec #(.FRAC(FRAC), .N(H3)) u_relu3 (.x(h3), .y(r3));

  affine #(.FRAC(FRAC), .N_IN(H3), .N_OUT(1), .OUT_W(THETA_W), .OUT_FRAC(THETA_FRAC)) u_fc4 (
    .clk, .rst_n, .cfg_we(we[3]), .cfg_addr, .cfg_data,
    .in_valid(v3), .x(r3), .out_valid, .y(out));

  assign theta = theta_t'(out[0]);

endmodule
