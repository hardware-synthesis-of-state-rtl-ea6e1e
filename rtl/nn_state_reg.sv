// nn_state_reg -- input multiplexers and state registers of the shared layer.
//
// Holds the state vector x[k] that every node of the shared layer reads. In
// front of each of the M registers sits a 2:1 multiplexer: with sel =
// SEL_INPUT the register takes the network input u_i (or 0 for i >= L, since
// the layer has more nodes than the network has inputs); with sel =
// SEL_FEEDBACK it takes the output x_i of the node just evaluated, which is
// the state update x[k] -> x[k+1]. The multiplexer/register pairs and the
// constant 0 on the last multiplexer follow the block diagram of the
// design; the active-low asynchronous reset to zero and the load enable are
// choices of this implementation.
//
// Interface: load (1 cycle) captures the multiplexer outputs on the rising
// clock edge; state[] is the register output, valid from the next cycle.
module nn_state_reg
  import nn_pkg::*;
#(
  parameter int unsigned L      = NN_L,
  parameter int unsigned M      = NN_M,
  parameter int unsigned DATA_W = NN_DATA_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  state_sel_e               sel,
  input  logic signed [DATA_W-1:0] u     [L],
  input  logic signed [DATA_W-1:0] x_fb  [M],
  output logic signed [DATA_W-1:0] state [M]
);

  // The shared layer must be at least as wide as the input vector.
  initial assert (L <= M) else $error("nn_state_reg: L (%0d) must not exceed M (%0d)", L, M);

  for (genvar i = 0; i < M; i++) begin : g_lane
    logic signed [DATA_W-1:0] mux_out;

    always_comb begin
      if (sel == SEL_FEEDBACK) mux_out = x_fb[i];
      else if (i < L)          mux_out = u[(i < L) ? i : 0];
      else                     mux_out = '0;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)    state[i] <= '0;
      else if (load) state[i] <= mux_out;
    end
  end

endmodule
