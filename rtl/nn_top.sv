// nn_top -- layer-multiplexed multilayer perceptron built as a state-space
// machine.
//
// The network (default L = 3 inputs, N = 4 hidden layers of M = 4 tanh nodes,
// P = 2 linear outputs) is evaluated as the iteration
//     x[0]   = tanh(beta u + b[0])
//     x[k]   = tanh(W^k x[k-1] + b[k]),   k = 1 .. N-1
//     y      = C x[N-1]
// on a single hardware layer of M nodes that is reused N+1 times. The state
// registers (with their input multiplexers) hold x[k]; every node reads the
// whole state vector and its own weight ROM, addressed by the layer index;
// the FSM controller sequences the layers. This structure (one layer of
// parallel nodes, per-node ROMs, input/feedback multiplexers, FSM control)
// follows the design's block diagram; the data format, the handshake and the
// per-layer cycle count are this implementation's choices.
//
// Interface: u is taken when in_valid && in_ready. y is valid in the cycle
// out_valid pulses, (N+1)*(ceil(M/NUM_MULT)+1) cycles after the input was
// taken (10 cycles with the defaults), and holds until the next result.
// u, y, weights and states share one two's-complement format, DATA_W bits
// with FRAC_W fraction bits (default 24 and 16). Weights come from the hex
// image WEIGHT_FILE (layout in nn_weight_rom).
module nn_top
  import nn_pkg::*;
#(
  parameter int unsigned L              = NN_L,
  parameter int unsigned N              = NN_N,
  parameter int unsigned M              = NN_M,
  parameter int unsigned P              = NN_P,
  parameter int unsigned DATA_W         = NN_DATA_W,
  parameter int unsigned FRAC_W         = NN_FRAC_W,
  parameter int unsigned NUM_MULT       = NN_NUM_MULT,
  parameter int unsigned LUT_ADDR_W     = NN_LUT_ADDR_W,
  parameter int unsigned LUT_RANGE_LOG2 = NN_LUT_RANGE_LOG2,
  parameter string       WEIGHT_FILE    = NN_WEIGHT_FILE
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [DATA_W-1:0] u [L],
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] y [P]
);

  localparam int unsigned CHUNKS  = (M + NUM_MULT - 1) / NUM_MULT;
  localparam int unsigned LAYER_W = $clog2(N + 1);
  localparam int unsigned CHUNK_W = (CHUNKS > 1) ? $clog2(CHUNKS) : 1;

  initial assert (P <= M) else $error("nn_top: P (%0d) must not exceed M (%0d)", P, M);

  logic               state_load, mac_clear, mac_en, out_layer, y_load;
  state_sel_e         state_sel;
  logic [LAYER_W-1:0] layer;
  logic [CHUNK_W-1:0] chunk;

  logic signed [DATA_W-1:0] state  [M];
  logic signed [DATA_W-1:0] node_x [M];

  nn_controller #(.N(N), .CHUNKS(CHUNKS)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (in_valid),
    .in_ready   (in_ready),
    .state_load (state_load),
    .state_sel  (state_sel),
    .layer      (layer),
    .chunk      (chunk),
    .mac_clear  (mac_clear),
    .mac_en     (mac_en),
    .out_layer  (out_layer),
    .y_load     (y_load),
    .out_valid  (out_valid)
  );

  nn_state_reg #(.L(L), .M(M), .DATA_W(DATA_W)) u_state (
    .clk   (clk),
    .rst_n (rst_n),
    .load  (state_load),
    .sel   (state_sel),
    .u     (u),
    .x_fb  (node_x),
    .state (state)
  );

  for (genvar i = 0; i < M; i++) begin : g_node
    nn_node #(
      .M(M), .N(N), .DATA_W(DATA_W), .FRAC_W(FRAC_W), .NUM_MULT(NUM_MULT), .NODE(i),
      .WEIGHT_FILE(WEIGHT_FILE), .LUT_ADDR_W(LUT_ADDR_W), .LUT_RANGE_LOG2(LUT_RANGE_LOG2)
    ) u_node (
      .clk       (clk),
      .rst_n     (rst_n),
      .state     (state),
      .layer     (layer),
      .chunk     (chunk),
      .mac_clear (mac_clear),
      .mac_en    (mac_en),
      .out_layer (out_layer),
      .x         (node_x[i])
    );
  end

  // Output register: nodes 0 .. P-1 of the linear output layer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < P; p++) y[p] <= '0;
    end else if (y_load) begin
      for (int p = 0; p < P; p++) y[p] <= node_x[p];
    end
  end

endmodule
