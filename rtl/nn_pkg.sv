// nn_pkg -- shared constants and types of the layer-multiplexed MLP.
//
// The network is computed as a state-space iteration: the state vector x[k]
// is the output of layer k, and one hardware layer of M nodes is reused for
// every layer. The default sizes are those of the 3-4-4-4-4-2 network
// (L = 3 inputs, N = 4 hidden layers of M = 4 tanh nodes, P = 2 outputs).
// The word format (24-bit two's complement with 16 fraction bits), the number
// of multipliers per node and the tanh table size are choices of this design:
// 24 bits is the top of the 20..24-bit range reported as sufficient for this
// network, the split between integer and fraction bits is not given.
package nn_pkg;

  // Network shape
  localparam int unsigned NN_L = 3;  // inputs
  localparam int unsigned NN_N = 4;  // hidden layers
  localparam int unsigned NN_M = 4;  // nodes per hidden layer
  localparam int unsigned NN_P = 2;  // outputs

  // Fixed-point format, shared by inputs, weights, states and outputs
  localparam int unsigned NN_DATA_W = 24;
  localparam int unsigned NN_FRAC_W = 16;

  // Multipliers per node (1 .. M); M gives one MAC cycle per layer
  localparam int unsigned NN_NUM_MULT = 4;

  // tanh table: 2**NN_LUT_ADDR_W entries covering [-2**NN_LUT_RANGE_LOG2, +2**NN_LUT_RANGE_LOG2)
  localparam int unsigned NN_LUT_ADDR_W     = 10;
  localparam int unsigned NN_LUT_RANGE_LOG2 = 2;

  // Default weight image (see README for its layout)
  localparam string NN_WEIGHT_FILE = "rtl/nn_weights.hex";

  // Source of the value loaded into each state register
  typedef enum logic {
    SEL_INPUT    = 1'b0,   // network input u_i, or 0 where i >= L
    SEL_FEEDBACK = 1'b1    // node output x_i of the layer just computed
  } state_sel_e;

  // Controller states
  typedef enum logic [1:0] {
    CTRL_IDLE = 2'd0,      // waiting for an input vector
    CTRL_MAC  = 2'd1,      // multiply-accumulate cycles of one layer
    CTRL_ACT  = 2'd2       // activation and write-back of one layer
  } ctrl_state_e;

endpackage
