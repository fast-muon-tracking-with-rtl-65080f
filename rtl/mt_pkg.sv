// mt_pkg: shared fixed-point types and constants of the multistage muon
// tracking network.
//
// Every value in the network is a two's complement fixed-point number in the
// style of ap_fixed<W,I>: W bits of which FRAC are fraction bits. The default
// is the QF7 variant, with 7 fraction bits on weights, biases and activations
// and FRAC+2 = 9 fraction bits in accumulators; the output layer is always
// ap_ufixed<16,9>. Overflow wraps and rounding truncates towards minus
// infinity. The fraction bits, the two extra accumulator bits and the output
// format follow the paper; the integer widths (DATA_I, WGT_I, BIAS_I, ACC_I)
// are this design's choice, because the trained value ranges they were
// fitted to are not published.
//
// The arithmetic itself lives in the modules, sized by their FRAC parameter:
// a product of an activation and a weight (2*FRAC fraction bits) is floored
// to FRAC+2 bits and wrapped to the accumulator width; an accumulator becomes
// an activation by flooring 2 bits and wrapping.
package mt_pkg;

  // Default fraction bits of weights, biases and activations (QF7). Every
  // arithmetic module takes FRAC as a parameter; 5 and 3 give QF5 and QF3.
  localparam int FRAC_DEFAULT = 7;

  // Integer bits, sign included, of each kind of value. Total widths are
  // these plus FRAC (plus FRAC+2 for accumulators).
  localparam int DATA_I = 5;   // activations
  localparam int WGT_I  = 3;   // weights
  localparam int BIAS_I = 5;   // biases
  localparam int ACC_I  = 11;  // accumulators

  // Output layer: unsigned, 9 integer and 7 fraction bits, whatever FRAC is.
  localparam int THETA_W    = 16;
  localparam int THETA_FRAC = 7;

  // Configuration write port of the weight registers.
  localparam int CFG_AW  = 12;  // local register address inside one layer
  localparam int CFG_DW  = 16;

  // Geometry of the detector: 50 channels per gas gap; 3, 2, 2 gaps.
  localparam int NCH     = 50;
  localparam int GAPS_M1 = 3;
  localparam int GAPS_M2 = 2;
  localparam int GAPS_M3 = 2;

  // Layer numbers of the top-level configuration address map
  // (cfg_addr[15:12]).
  typedef enum logic [3:0] {
    L_CONV_M1 = 4'd0,
    L_CONV_M2 = 4'd1,
    L_CONV_M3 = 4'd2,
    L_ML_13   = 4'd3,   // M1 -> M3 projection
    L_ML_12   = 4'd4,   // M1 -> M2 projection
    L_ML_23   = 4'd5,   // M2 -> M3 projection
    L_FC1     = 4'd6,
    L_FC2     = 4'd7,
    L_FC3     = 4'd8,
    L_FC4     = 4'd9
  } layer_e;

  typedef logic [THETA_W-1:0] theta_t;

endpackage
