// snn_pkg: types and constants shared by the spiking-network datapath.
//
// The neuron datapath follows the chain MUL -> ACCU -> THRES -> ENCODE. Weights are
// 8-bit signed integers that can be used at binary, INT2, INT4 or INT8 precision;
// biases and membrane potentials are 16-bit signed; sums are accumulated in 24 bits.
// The precision set (binary, INT2/4/8) and the rate / latency input codes come from
// the description of the design; every width here is this design's own choice.
package snn_pkg;

  localparam int W_W   = 8;   // weight width
  localparam int B_W   = 16;  // bias width
  localparam int V_W   = 16;  // membrane potential width
  localparam int ACC_W = 24;  // accumulator width
  localparam int REF_W = 4;   // refractory counter width
  localparam int PIX_W = 8;   // pixel / sample width fed to the spike encoder

  // Weight precision used by the multiplier.
  typedef enum logic [1:0] {
    PREC_BIN  = 2'd0,   // sign of the weight: +1 / -1
    PREC_INT2 = 2'd1,   // weight[1:0], signed
    PREC_INT4 = 2'd2,   // weight[3:0], signed
    PREC_INT8 = 2'd3    // full weight
  } prec_e;

  // Input spike code.
  typedef enum logic {
    CODE_RATE    = 1'b0,
    CODE_LATENCY = 1'b1
  } code_e;

  // Threshold parameters of the LIF neuron (threshold, leakage, reset, refractory time).
  typedef struct packed {
    logic signed [V_W-1:0] v_th;       // firing threshold
    logic signed [V_W-1:0] v_rest;     // resting and reset potential
    logic [3:0]            leak_shift; // leak = (v - v_rest) >>> leak_shift; 0 = no leak
    logic [REF_W-1:0]      t_ref;      // refractory time in time steps
  } lif_params_t;

  // Targets of the configuration write bus of the top level.
  typedef enum logic [2:0] {
    CFG_BCU_PIX    = 3'd0,
    CFG_BCU_CONV_W = 3'd1,
    CFG_BCU_CONV_B = 3'd2,
    CFG_FCU_PIX    = 3'd3,
    CFG_FCU_CONV_W = 3'd4,
    CFG_FCU_CONV_B = 3'd5,
    CFG_FCU_LIN_W  = 3'd6,
    CFG_FCU_LIN_B  = 3'd7
  } cfg_sel_e;

  // Which unit runs an inference.
  typedef enum logic {
    UNIT_BCU = 1'b0,
    UNIT_FCU = 1'b1
  } unit_e;

endpackage
