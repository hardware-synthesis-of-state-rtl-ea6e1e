// nn_weight_rom -- weight and bias ROM of one node of the shared layer.
//
// Each node of the shared layer has its own ROM, addressed by the layer index
// that the controller supplies, so that the same node computes a different
// row of a different weight matrix in every layer. For layer k the ROM gives
// node NODE's M incoming weights w[k][NODE][0..M-1] (from state element j to
// this node) and its bias b[k][NODE], all in the shared data format.
// Layers are numbered 0 .. N: layer 0 is the input weight matrix (beta, on
// the zero-padded input vector), layers 1 .. N-1 the hidden matrices W^k,
// layer N the output matrix C (its bias words are ignored by the node).
//
// The contents are read once from a hex image, WEIGHT_FILE, before operation
// (the design loads weights at synthesis; the file layout is this
// implementation's): word ((k*M + i)*(M+1) + j) is w[k][i][j] for j < M and
// b[k][i] for j = M, one two's-complement word of DATA_W bits per line.
// Every node reads the whole image and keeps its own rows. With an empty
// WEIGHT_FILE nothing is loaded and the contents are left to the testbench.
//
// Interface: combinational read, w/bias follow layer in the same cycle.
// A layer index above N reads zeros.
module nn_weight_rom
  import nn_pkg::*;
#(
  parameter int unsigned M           = NN_M,
  parameter int unsigned N           = NN_N,
  parameter int unsigned DATA_W      = NN_DATA_W,
  parameter int unsigned NODE        = 0,
  parameter string       WEIGHT_FILE = NN_WEIGHT_FILE,
  localparam int unsigned LAYER_W    = $clog2(N + 1)
) (
  input  logic        [LAYER_W-1:0] layer,
  output logic signed [DATA_W-1:0]  w    [M],
  output logic signed [DATA_W-1:0]  bias
);

  localparam int unsigned ROW   = M + 1;
  localparam int unsigned WORDS = (N + 1) * M * ROW;

  logic signed [DATA_W-1:0] image [WORDS];

  // An empty WEIGHT_FILE leaves the image to be written by a testbench
  // (simulation only), for networks too large for a hand-kept file.
  initial if (WEIGHT_FILE != "") $readmemh(WEIGHT_FILE, image);

  // Word address of this node's row for the current layer
  function automatic int unsigned row_base(input logic [LAYER_W-1:0] k);
    return (int'(k) * M + NODE) * ROW;
  endfunction

  always_comb begin
    for (int j = 0; j < M; j++) begin
      w[j] = (layer <= LAYER_W'(N)) ? image[row_base(layer) + j] : '0;
    end
    bias = (layer <= LAYER_W'(N)) ? image[row_base(layer) + M] : '0;
  end

endmodule
