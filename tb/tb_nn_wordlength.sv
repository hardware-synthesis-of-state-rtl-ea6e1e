// tb_nn_wordlength -- the 3-4-4-4-4-2 network at word lengths of 8, 12, 16,
// 24, 32 and 64 bits, each with 5 integer bits (sign included) and the rest
// fraction bits, against a double-precision model.
//
// One set of real-valued weights and biases in [-1, 1) (from a hash of the
// word index) is rounded to each word length and written straight into the
// ROMs of that instance, which is built with an empty WEIGHT_FILE. The same
// random inputs in [-1, 1) go to all six instances. Each output is compared
// bit-exactly with the reference fixed-point model of its width; the
// signal-to-noise ratio of y0 and y1 against the double-precision model with
// the unrounded weights is printed per width, and must grow from 8 to 12 to
// 16 bits. Above 16 bits the 1024-entry tanh table, not the word length,
// bounds the SNR, so it levels off from 24 bits on.
module tb_nn_wordlength;
  import nn_pkg::*;
  import tb_nn_ref_pkg::*;

  localparam int unsigned L = 3, N = 4, M = 4, P = 2, INT_W = 5;
  localparam int unsigned NW = 6;
  localparam int unsigned WIDTHS [NW] = '{8, 12, 16, 24, 32, 64};
  localparam int unsigned VECTORS = 400;
  localparam int unsigned WORDS = (N + 1) * M * (M + 1);
  localparam int unsigned LATENCY = (N + 1) * 2;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // Real weight of image word w: hash mapped to [-1, 1); zero where the
  // layout needs it (padded inputs, output-layer bias, unused output nodes)
  function automatic real wreal(input int w);
    logic [31:0] h;
    int k, i, j;
    k = w / (M * (M + 1)); i = (w / (M + 1)) % M; j = w % (M + 1);
    if ((k == 0 && j < M && j >= L) || (k == N && (j == M || i >= P))) return 0.0;
    h = 32'(w) * 32'h9E3779B1 + 32'h7F4A7C15;
    h ^= h >> 15; h *= 32'h2C1B3C6D; h ^= h >> 12; h *= 32'h297A2D39; h ^= h >> 15;
    return real'(h[23:0]) / real'(1 << 23) - 1.0;
  endfunction

  real ur [VECTORS][L];           // shared inputs
  real yr [VECTORS][P];           // double-precision outputs
  real snr [NW][P];
  int  done_cnt = 0;

  initial begin : watchdog
    repeat (VECTORS * (LATENCY + 6) + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // inputs and double-precision outputs
  initial begin
    real x[M], xn[M], s;
    for (int v = 0; v < VECTORS; v++) begin
      for (int i = 0; i < L; i++) ur[v][i] = real'($urandom % 65536) / 32768.0 - 1.0;
      for (int i = 0; i < M; i++) x[i] = (i < L) ? ur[v][i] : 0.0;
      for (int k = 0; k <= N; k++) begin
        for (int i = 0; i < M; i++) begin
          s = 0.0;
          for (int j = 0; j < M; j++) s += wreal((k * M + i) * (M + 1) + j) * x[j];
          xn[i] = (k < N) ? $tanh(s + wreal((k * M + i) * (M + 1) + M)) : s;
        end
        x = xn;
      end
      for (int p = 0; p < P; p++) yr[v][p] = x[p];
    end
  end

  for (genvar c = 0; c < NW; c++) begin : g_w
    localparam int unsigned DW = WIDTHS[c];
    localparam int unsigned FW = DW - INT_W;

    logic in_valid = 1'b0, in_ready, out_valid;
    logic signed [DW-1:0] u [L];
    logic signed [DW-1:0] y [P];

    nn_top #(.L(L), .N(N), .M(M), .P(P), .DATA_W(DW), .FRAC_W(FW), .NUM_MULT(M),
             .WEIGHT_FILE("")) dut (
      .clk (clk), .rst_n (rst_n), .in_valid (in_valid), .in_ready (in_ready),
      .u (u), .out_valid (out_valid), .y (y)
    );

    function automatic wide_t quant(input real r);
      return wide_t'(longint'(r * (2.0 ** FW)));
    endfunction

    for (genvar i = 0; i < M; i++) begin : g_fill
      initial begin
        #1;
        for (int w = 0; w < WORDS; w++) dut.g_node[i].u_node.u_rom.image[w] = DW'(quant(wreal(w)));
      end
    end

    task automatic ref_net(input wide_t uin[], output wide_t yout[]);
      wide_t x[], xn[], ws[];
      x = new[M]; xn = new[M]; ws = new[M];
      for (int i = 0; i < M; i++) x[i] = (i < L) ? uin[i] : 0;
      for (int k = 0; k <= N; k++) begin
        for (int i = 0; i < M; i++) begin
          for (int j = 0; j < M; j++) ws[j] = quant(wreal((k * M + i) * (M + 1) + j));
          xn[i] = node_q(x, ws, quant(wreal((k * M + i) * (M + 1) + M)), k == N, DW, FW,
                         NN_LUT_ADDR_W, NN_LUT_RANGE_LOG2);
        end
        x = xn;
        xn = new[M];
      end
      yout = new[P];
      for (int p = 0; p < P; p++) yout[p] = x[p];
    endtask

    initial begin
      wide_t ui[], ye[];
      real sig[P], err[P], e;
      int lat;
      ui = new[L];
      for (int p = 0; p < P; p++) begin sig[p] = 0.0; err[p] = 0.0; end
      for (int i = 0; i < L; i++) u[i] = '0;
      wait (rst_n);
      for (int v = 0; v < VECTORS; v++) begin
        for (int i = 0; i < L; i++) begin
          ui[i] = quant(ur[v][i]);
          u[i]  = DW'(ui[i]);
        end
        ref_net(ui, ye);
        @(negedge clk);
        in_valid = 1'b1;
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        #1;
        in_valid = 1'b0;
        lat = 0;
        do begin
          @(posedge clk); #1; lat++;
        end while (!out_valid && lat < LATENCY + 5);
        checks++;
        if (lat != LATENCY) begin
          failures++;
          $display("FAIL %0d bits vector %0d latency %0d", DW, v, lat);
        end
        for (int p = 0; p < P; p++) begin
          checks++;
          if (sext(wide_t'(y[p]), DW) !== ye[p]) begin
            failures++;
            $display("FAIL %0d bits vector %0d y%0d=%h expected %h", DW, v, p, y[p], ye[p][DW-1:0]);
          end
          e = to_real(sext(wide_t'(y[p]), DW), FW) - yr[v][p];
          sig[p] += yr[v][p] * yr[v][p];
          err[p] += e * e;
        end
      end
      for (int p = 0; p < P; p++) snr[c][p] = 10.0 * $log10(sig[p] / (err[p] + 1.0e-300));
      done_cnt++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done_cnt == NW);
    for (int c = 0; c < NW; c++)
      $display("%2d bits (Q%0d.%0d): y0 SNR %7.2f dB, y1 SNR %7.2f dB",
               WIDTHS[c], INT_W, WIDTHS[c] - INT_W, snr[c][0], snr[c][1]);
    for (int c = 1; c < 3; c++) begin
      for (int p = 0; p < P; p++) begin
        checks++;
        if (!(snr[c][p] > snr[c-1][p])) begin
          failures++;
          $display("FAIL y%0d SNR does not grow from %0d to %0d bits", p, WIDTHS[c-1], WIDTHS[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
