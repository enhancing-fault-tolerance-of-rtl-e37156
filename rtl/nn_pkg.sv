// nn_pkg: sizes and number formats shared by the blocks of the integer
// 8-128-256 neural network that computes f = SBox(x xor k).
//
// The network has 8 binary inputs (the bits of x), 128 ReLU hidden neurons
// and 256 linear output neurons, one per possible output byte; the answer is
// the index of the largest output (ArgMax).  All parameters are integers
// (the trained floating-point values scaled by 2, i.e. one fractional bit,
// then rounded).  The layer sizes and the 20-bit multiplier width follow the
// paper; every other width below is this design's choice, picked so that the
// 9-bit operands of the hidden layer's final adder come out as described.
package nn_pkg;

  localparam int unsigned N_IN   = 8;    // input neurons (bits of x)
  localparam int unsigned N_HID  = 128;  // hidden neurons
  localparam int unsigned N_OUT  = 256;  // output neurons (one-hot classes)
  localparam int unsigned N_MUL  = 8;    // parallel multipliers in the output layer

  localparam int unsigned W1_W   = 7;    // first-layer weight, signed
  localparam int unsigned B1_W   = 9;    // hidden bias, signed
  localparam int unsigned H_W    = 11;   // hidden pre-activation, signed
  localparam int unsigned A_W    = H_W - 1;  // ReLU output, unsigned
  localparam int unsigned W2_W   = 8;    // second-layer weight, signed
  localparam int unsigned B2_W   = 16;   // output bias, signed
  localparam int unsigned MUL_W  = 20;   // multiplier operand width
  localparam int unsigned ACC_W  = 48;   // output accumulator width

  // Parameter memories addressed through the top-level load port.
  typedef enum logic [1:0] {
    PRM_W1 = 2'd0,   // w(1)[i][j]: row = hidden j, col = input i
    PRM_B1 = 2'd1,   // b(1)[j]:    row = hidden j
    PRM_W2 = 2'd2,   // w(2)[j][k]: row = output k, col = hidden j
    PRM_B2 = 2'd3    // b(2)[k]:    row = output k
  } prm_sel_e;

  // Fixed cycle counts of this implementation (start pulse to done pulse).
  localparam int unsigned LH_LAT_EXTRA = 4;   // read + two DSP adders + LUT adder
  localparam int unsigned LO_CYC_PER_NEURON = 1 + N_HID / N_MUL;  // row read + executions
  localparam int unsigned LO_LAT_EXTRA = 4;   // multiplier, tree, accumulator, done

endpackage
