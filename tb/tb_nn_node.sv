// tb_nn_node -- self-checking test of one node with two multipliers (two
// MAC cycles per layer, so chunked accumulation is exercised). For every
// layer of the weight image a random state vector is applied, the node is
// stepped through its MAC cycles and its output is compared with the
// reference node model: tanh with bias on layers 0 .. N-1, linear without
// bias on layer N. Large state values drive the pre-activation into
// saturation and the table into its clamped ends; these cases are counted.
module tb_nn_node;
  import nn_pkg::*;
  import tb_nn_ref_pkg::*;

  localparam int unsigned M = NN_M, N = NN_N, DW = NN_DATA_W, FW = NN_FRAC_W;
  localparam int unsigned NM = 2, NODE = 1;
  localparam int unsigned CHUNKS = (M + NM - 1) / NM;
  localparam int unsigned LAYER_W = $clog2(N + 1);
  localparam int unsigned CHUNK_W = (CHUNKS > 1) ? $clog2(CHUNKS) : 1;
  localparam int unsigned WORDS = (N + 1) * M * (M + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [DW-1:0] state [M];
  logic [LAYER_W-1:0] layer = '0;
  logic [CHUNK_W-1:0] chunk = '0;
  logic mac_clear = 1'b0, mac_en = 1'b0, out_layer = 1'b0;
  logic signed [DW-1:0] x;
  logic [DW-1:0] img [WORDS];

  int checks = 0, failures = 0, n_sat = 0, n_clamp = 0, n_linear = 0;

  always #5 clk = ~clk;

  nn_node #(.M(M), .N(N), .DATA_W(DW), .FRAC_W(FW), .NUM_MULT(NM), .NODE(NODE),
            .WEIGHT_FILE("rtl/nn_weights.hex")) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wide_t xs[], ws[], b, e, pre;
    $readmemh("rtl/nn_weights.hex", img);
    xs = new[M]; ws = new[M];
    foreach (state[j]) state[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 600; t++) begin
      int k;
      k = t % (N + 1);
      @(negedge clk);
      layer     = LAYER_W'(k);
      out_layer = (k == N);
      foreach (state[j]) begin
        // mostly |x| < 2, sometimes large enough to saturate
        state[j] = (t % 7 == 3) ? DW'($urandom) : DW'($signed($urandom % (4 << FW)) - (2 << FW));
        xs[j] = wide_t'(state[j]);
        ws[j] = sext(wide_t'(img[widx(k, NODE, j, M)]), DW);
      end
      b = sext(wide_t'(img[widx(k, NODE, M, M)]), DW);
      for (int c = 0; c < CHUNKS; c++) begin
        chunk = CHUNK_W'(c); mac_en = 1'b1; mac_clear = (c == 0);
        @(negedge clk);
      end
      mac_en = 1'b0; mac_clear = 1'b0;
      #1;
      e = node_q(xs, ws, b, out_layer, DW, FW, NN_LUT_ADDR_W, NN_LUT_RANGE_LOG2);
      pre = 0;
      foreach (xs[j]) pre += xs[j] * ws[j];
      if (!out_layer) pre += b <<< FW;
      pre = pre >>> FW;
      if (pre != sat(pre, DW)) n_sat++;
      if (!out_layer && (pre >= (4 << FW) || pre < -(4 << FW))) n_clamp++;
      if (out_layer) n_linear++;
      checks++;
      if (wide_t'(x) !== e) begin
        failures++;
        $display("FAIL t=%0d layer %0d: x=%h expected %h", t, k, x, e[DW-1:0]);
      end
    end
    checks++;
    if (n_sat == 0 || n_clamp == 0 || n_linear == 0) begin
      failures++;
      $display("FAIL coverage: saturated=%0d clamped=%0d linear=%0d", n_sat, n_clamp, n_linear);
    end
    $display("saturated=%0d clamped=%0d linear=%0d", n_sat, n_clamp, n_linear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
