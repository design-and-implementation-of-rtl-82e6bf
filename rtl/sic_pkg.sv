// sic_pkg: shared constants and types of the neural-network self-interference
// canceller. The default sizes are the design point evaluated for the
// canceller: memory L = 13 complex taps, N_h = 18 hidden neurons, Q = 17-bit
// datapath, 52 PEs in the hidden layer, 4 PEs in the output layer and 2
// complex PEs in the linear canceller, which gives one cancelled sample every
// 9 clock cycles. The number of fractional bits (FRAC_DEF) is not given by
// the source design and is this implementation's choice.
package sic_pkg;

  // Datapath word width (all weights, biases, inputs and partial sums).
  localparam int unsigned Q_DEF     = 17;
  // Fractional bits of the two's complement fixed-point format (own choice).
  localparam int unsigned FRAC_DEF  = 12;
  // Memory of the canceller in complex samples.
  localparam int unsigned L_DEF     = 13;
  // Hidden neurons.
  localparam int unsigned NH_DEF    = 18;
  // Processing elements of the hidden (NBN) and output (IBI) stages.
  localparam int unsigned NPE_H_DEF = 52;
  localparam int unsigned NPE_O_DEF = 4;
  // Complex processing elements of the linear canceller.
  localparam int unsigned NPE_L_DEF = 2;
  // Width of the signed denormalisation shift.
  localparam int unsigned SHW_DEF   = 4;

  // Activation function applied by an output interface.
  typedef enum logic {
    ACT_NONE = 1'b0,
    ACT_RELU = 1'b1
  } act_e;

  // Target of the external parameter-memory write port of the canceller.
  typedef enum logic [2:0] {
    CFG_HID_W = 3'd0,  // hidden layer weights
    CFG_HID_B = 3'd1,  // hidden layer biases
    CFG_OUT_W = 3'd2,  // output layer weights
    CFG_OUT_B = 3'd3,  // output layer biases
    CFG_LIN_H = 3'd4   // linear canceller coefficients
  } cfg_sel_e;

endpackage
