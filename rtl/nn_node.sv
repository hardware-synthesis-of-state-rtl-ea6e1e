// nn_node -- one node (neuron) of the shared layer.
//
// Computes x_i[k+1] = f( sum_j w[k][i][j] * x_j[k] + b[k][i] ) for the layer
// index k given by the controller, with f = tanh on layers 0 .. N-1 and
// f = identity without bias on layer N, the linear output layer y = C x.
// The node holds its own weight ROM, a multiply-accumulate unit and the tanh
// table. The M products of a layer are taken NUM_MULT at a time over
// CHUNKS = ceil(M/NUM_MULT) cycles (operand chunk c covers state elements
// c*NUM_MULT ..). The full-precision sum is shifted right by FRAC_W
// (truncation toward minus infinity) and saturated to DATA_W bits before the
// activation; the rounding and saturation are this design's choices.
//
// Interface / timing: drive mac_en (with mac_clear on the first chunk) for
// the CHUNKS cycles of a layer, chunk = 0 .. CHUNKS-1, with layer held; in the
// cycle after the last chunk, x holds the node output (combinational from the
// accumulator) and stays valid until the accumulator is next enabled.
module nn_node
  import nn_pkg::*;
#(
  parameter int unsigned M              = NN_M,
  parameter int unsigned N              = NN_N,
  parameter int unsigned DATA_W         = NN_DATA_W,
  parameter int unsigned FRAC_W         = NN_FRAC_W,
  parameter int unsigned NUM_MULT       = NN_NUM_MULT,
  parameter int unsigned NODE           = 0,
  parameter string       WEIGHT_FILE    = NN_WEIGHT_FILE,
  parameter int unsigned LUT_ADDR_W     = NN_LUT_ADDR_W,
  parameter int unsigned LUT_RANGE_LOG2 = NN_LUT_RANGE_LOG2,
  localparam int unsigned LAYER_W       = $clog2(N + 1),
  localparam int unsigned CHUNKS        = (M + NUM_MULT - 1) / NUM_MULT,
  localparam int unsigned CHUNK_W       = (CHUNKS > 1) ? $clog2(CHUNKS) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic signed [DATA_W-1:0]  state [M],
  input  logic        [LAYER_W-1:0] layer,
  input  logic        [CHUNK_W-1:0] chunk,
  input  logic                      mac_clear,
  input  logic                      mac_en,
  input  logic                      out_layer,
  output logic signed [DATA_W-1:0]  x
);

  localparam int unsigned ACC_W = 2 * DATA_W + $clog2(M + 1) + 1;

  localparam logic signed [ACC_W-1:0] X_MAX = ACC_W'({1'b0, {(DATA_W-1){1'b1}}});
  localparam logic signed [ACC_W-1:0] X_MIN = -X_MAX - 1;

  // Weight ROM
  logic signed [DATA_W-1:0] w [M];
  logic signed [DATA_W-1:0] bias;

  nn_weight_rom #(
    .M(M), .N(N), .DATA_W(DATA_W), .NODE(NODE), .WEIGHT_FILE(WEIGHT_FILE)
  ) u_rom (
    .layer (layer),
    .w     (w),
    .bias  (bias)
  );

  // Operand selection for this chunk: multiplier m takes state element
  // chunk*NUM_MULT + m (zero beyond M)
  function automatic int unsigned lane(input logic [CHUNK_W-1:0] c, input int unsigned m);
    return int'(c) * NUM_MULT + m;
  endfunction

  logic signed [DATA_W-1:0] op_x [NUM_MULT];
  logic signed [DATA_W-1:0] op_w [NUM_MULT];

  always_comb begin
    for (int m = 0; m < NUM_MULT; m++) begin
      op_x[m] = (lane(chunk, m) < M) ? state[lane(chunk, m)] : '0;
      op_w[m] = (lane(chunk, m) < M) ? w[lane(chunk, m)]     : '0;
    end
  end

  // Multiply-accumulate
  logic signed [ACC_W-1:0] acc;

  nn_mac #(
    .DATA_W(DATA_W), .NUM_MULT(NUM_MULT), .ACC_W(ACC_W)
  ) u_mac (
    .clk   (clk),
    .rst_n (rst_n),
    .clear (mac_clear),
    .en    (mac_en),
    .a     (op_x),
    .b     (op_w),
    .acc   (acc)
  );

  // Bias, rescale and saturate
  logic signed [ACC_W-1:0]  sum, scaled;
  logic signed [DATA_W-1:0] z, t;

  always_comb begin
    sum    = out_layer ? acc : acc + (ACC_W'(bias) <<< FRAC_W);
    scaled = sum >>> FRAC_W;
    if (scaled > X_MAX)      z = X_MAX[DATA_W-1:0];
    else if (scaled < X_MIN) z = X_MIN[DATA_W-1:0];
    else                     z = scaled[DATA_W-1:0];
  end

  // Activation
  nn_tanh_lut #(
    .DATA_W(DATA_W), .FRAC_W(FRAC_W), .ADDR_W(LUT_ADDR_W), .RANGE_LOG2(LUT_RANGE_LOG2)
  ) u_tanh (
    .z (z),
    .y (t)
  );

  assign x = out_layer ? z : t;

endmodule
