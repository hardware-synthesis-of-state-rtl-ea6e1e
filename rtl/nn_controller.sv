// nn_controller -- FSM-based control unit of the layer-multiplexed MLP.
//
// Sequences the state-space iteration x[k+1] = f(W[k] x[k] + b[k]) over the
// shared layer. In IDLE it accepts an input vector (valid/ready handshake)
// and loads it through the input multiplexers into the state registers.
// For each layer k = 0 .. N it then spends CHUNKS cycles in MAC (the nodes
// multiply-accumulate, chunk = 0 .. CHUNKS-1, the first with mac_clear) and
// one cycle in ACT, where the node outputs are complete: for k < N they are
// written back through the multiplexers as the next state, for k = N (the
// linear output layer, out_layer = 1) they are captured as the network
// output and out_valid pulses in the next cycle. The control unit driving
// the multiplexers and the ROM addresses follows the block diagram of the
// design; the state encoding, the handshake and the cycle split are this
// implementation's.
//
// Timing: the input is taken on the rising edge where in_valid && in_ready;
// out_valid rises (N+1)*(CHUNKS+1) cycles later, for one cycle; in_ready is
// high again in that same cycle, so one vector is processed every
// (N+1)*(CHUNKS+1) + 1 cycles.
module nn_controller
  import nn_pkg::*;
#(
  parameter int unsigned N       = NN_N,
  parameter int unsigned CHUNKS  = 1,
  localparam int unsigned LAYER_W = $clog2(N + 1),
  localparam int unsigned CHUNK_W = (CHUNKS > 1) ? $clog2(CHUNKS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // input handshake
  input  logic               in_valid,
  output logic               in_ready,
  // state registers
  output logic               state_load,
  output state_sel_e         state_sel,
  // nodes
  output logic [LAYER_W-1:0] layer,
  output logic [CHUNK_W-1:0] chunk,
  output logic               mac_clear,
  output logic               mac_en,
  output logic               out_layer,
  // output
  output logic               y_load,
  output logic               out_valid
);

  ctrl_state_e st;

  localparam logic [LAYER_W-1:0] LAST_LAYER = LAYER_W'(N);
  localparam logic [CHUNK_W-1:0] LAST_CHUNK = CHUNK_W'(CHUNKS - 1);

  // Outputs decoded from the state (Moore, except in_valid gating the load)
  always_comb begin
    in_ready   = (st == CTRL_IDLE);
    mac_en     = (st == CTRL_MAC);
    mac_clear  = (st == CTRL_MAC) && (chunk == '0);
    out_layer  = (layer == LAST_LAYER);
    y_load     = (st == CTRL_ACT) && out_layer;
    state_load = ((st == CTRL_IDLE) && in_valid) || ((st == CTRL_ACT) && !out_layer);
    state_sel  = (st == CTRL_IDLE) ? SEL_INPUT : SEL_FEEDBACK;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= CTRL_IDLE;
      layer     <= '0;
      chunk     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      unique case (st)
        CTRL_IDLE: begin
          if (in_valid) begin
            st    <= CTRL_MAC;
            layer <= '0;
            chunk <= '0;
          end
        end
        CTRL_MAC: begin
          if (chunk == LAST_CHUNK) begin
            chunk <= '0;
            st    <= CTRL_ACT;
          end else begin
            chunk <= chunk + 1'b1;
          end
        end
        CTRL_ACT: begin
          if (out_layer) begin
            out_valid <= 1'b1;
            layer     <= '0;
            st        <= CTRL_IDLE;
          end else begin
            layer <= layer + 1'b1;
            st    <= CTRL_MAC;
          end
        end
        default: st <= CTRL_IDLE;
      endcase
    end
  end

  // Protocol rules
  a_valid_pulse: assert property (@(posedge clk) disable iff (!rst_n) out_valid |=> !out_valid);
  a_layer_range: assert property (@(posedge clk) disable iff (!rst_n) layer <= LAST_LAYER);
  a_chunk_range: assert property (@(posedge clk) disable iff (!rst_n) chunk <= LAST_CHUNK);

endmodule
