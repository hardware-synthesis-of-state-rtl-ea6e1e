// tb_nn_weight_rom -- self-checking test of the per-node weight ROM: for
// every node and every layer index (including indices above N, which must
// read zero) the weights and bias are compared with the weight image read
// by the testbench itself.
module tb_nn_weight_rom;
  import nn_pkg::*;
  import tb_nn_ref_pkg::*;

  localparam int unsigned M = NN_M, N = NN_N, DW = NN_DATA_W;
  localparam int unsigned LAYER_W = $clog2(N + 1);
  localparam int unsigned WORDS = (N + 1) * M * (M + 1);

  logic [LAYER_W-1:0] layer;
  logic signed [DW-1:0] w [M][M];
  logic signed [DW-1:0] bias [M];
  logic [DW-1:0] img [WORDS];

  int checks = 0, failures = 0;

  for (genvar i = 0; i < M; i++) begin : g_rom
    nn_weight_rom #(.M(M), .N(N), .DATA_W(DW), .NODE(i), .WEIGHT_FILE("rtl/nn_weights.hex")) dut (
      .layer (layer),
      .w     (w[i]),
      .bias  (bias[i])
    );
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nonzero;
    $readmemh("rtl/nn_weights.hex", img);
    nonzero = 0;
    for (int k = 0; k < (1 << LAYER_W); k++) begin
      layer = LAYER_W'(k);
      #1;
      for (int i = 0; i < M; i++) begin
        for (int j = 0; j <= M; j++) begin
          logic [DW-1:0] got, exp_w;
          got   = (j < M) ? w[i][j] : bias[i];
          exp_w = (k <= N) ? img[widx(k, i, j, M)] : '0;
          if (got != 0) nonzero++;
          checks++;
          if (got !== exp_w) begin
            failures++;
            $display("FAIL layer %0d node %0d word %0d: %h expected %h", k, i, j, got, exp_w);
          end
        end
      end
    end
    // the image must not be trivially empty
    checks++;
    if (nonzero < WORDS / 2) begin
      failures++;
      $display("FAIL only %0d nonzero words", nonzero);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
