// tb_nn_top -- end-to-end test of the network at its default size
// (3 inputs, 4 hidden layers of 4 tanh nodes, 2 outputs, 24-bit words with
// 16 fraction bits, one MAC cycle per layer), with the default weight image.
//
// Random input vectors are offered with random gaps; in_valid is sometimes
// raised while the network is busy, which must stall the source. Every
// result is compared bit-exactly with the reference fixed-point model, and
// the time from input acceptance to out_valid is checked against
// (N+1)*(ceil(M/NUM_MULT)+1) = 10 cycles. For inputs in [-2, 2) the outputs
// are also compared with a double-precision model of the same network and
// the signal-to-noise ratio of y0 and y1 is printed and required to exceed
// 35 dB (about 42 dB is expected: with the default 1024-entry tanh table the
// table step, not the 24-bit word, bounds the accuracy). Each mechanism of the design is counted and must occur: input
// load, feedback write-back, linear output layer, tanh table clamping,
// pre-activation saturation and an input stall.
module tb_nn_top;
  import nn_pkg::*;
  import tb_nn_ref_pkg::*;

  localparam int unsigned L = NN_L, N = NN_N, M = NN_M, P = NN_P;
  localparam int unsigned DW = NN_DATA_W, FW = NN_FRAC_W;
  localparam int unsigned CHUNKS = (M + NN_NUM_MULT - 1) / NN_NUM_MULT;
  localparam int unsigned LATENCY = (N + 1) * (CHUNKS + 1);
  localparam int unsigned WORDS = (N + 1) * M * (M + 1);
  localparam int unsigned VECTORS = 2000;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic in_ready, out_valid;
  logic signed [DW-1:0] u [L];
  logic signed [DW-1:0] y [P];
  logic [DW-1:0] img [WORDS];

  int checks = 0, failures = 0;
  int n_load = 0, n_feedback = 0, n_linear = 0, n_clamp = 0, n_sat = 0, n_stall = 0;
  real sig_pow [P], err_pow [P];

  always #5 clk = ~clk;

  nn_top dut (.*);

  initial begin : watchdog
    repeat (VECTORS * (LATENCY + 8) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters, observed at the controller
  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.state_load && dut.state_sel == SEL_INPUT)    n_load++;
      if (dut.state_load && dut.state_sel == SEL_FEEDBACK) n_feedback++;
      if (dut.y_load && dut.out_layer)                     n_linear++;
      if (in_valid && !in_ready)                           n_stall++;
    end
  end

  function automatic wide_t wgt(input int k, input int i, input int j);
    return sext(wide_t'(img[widx(k, i, j, M)]), DW);
  endfunction

  // Fixed-point reference; also counts clamped / saturated pre-activations
  task automatic ref_fixed(input wide_t uin[], output wide_t yout[]);
    wide_t x[], xn[], ws[], pre;
    x = new[M]; xn = new[M]; ws = new[M];
    foreach (x[i]) x[i] = (i < L) ? uin[i] : 0;
    for (int k = 0; k <= N; k++) begin
      for (int i = 0; i < M; i++) begin
        foreach (ws[j]) ws[j] = wgt(k, i, j);
        pre = 0;
        foreach (x[j]) pre += x[j] * ws[j];
        if (k < N) pre += wgt(k, i, M) <<< FW;
        pre = pre >>> FW;
        if (k < N && (pre >= (4 << FW) || pre < -(4 << FW))) n_clamp++;
        if (pre != sat(pre, DW)) n_sat++;
        xn[i] = node_q(x, ws, wgt(k, i, M), k == N, DW, FW, NN_LUT_ADDR_W, NN_LUT_RANGE_LOG2);
      end
      x = xn;
      xn = new[M];
    end
    yout = new[P];
    foreach (yout[p]) yout[p] = x[p];
  endtask

  // Double-precision model with the same (quantised) weights
  function automatic void ref_real(input real uin[], output real yout[]);
    real x[], xn[], s;
    x = new[M]; xn = new[M];
    foreach (x[i]) x[i] = (i < L) ? uin[i] : 0.0;
    for (int k = 0; k <= N; k++) begin
      for (int i = 0; i < M; i++) begin
        s = 0.0;
        for (int j = 0; j < M; j++) s += to_real(wgt(k, i, j), FW) * x[j];
        xn[i] = (k < N) ? $tanh(s + to_real(wgt(k, i, M), FW)) : s;
      end
      x = xn;
      xn = new[M];
    end
    yout = new[P];
    foreach (yout[p]) yout[p] = x[p];
  endfunction

  initial begin
    wide_t ui[], ye[];
    real   ur[], yr[];
    int    t_acc, lat;
    bit    big;
    $readmemh(NN_WEIGHT_FILE, img);
    ui = new[L]; ur = new[L];
    foreach (sig_pow[p]) begin sig_pow[p] = 0.0; err_pow[p] = 0.0; end
    foreach (u[i]) u[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < VECTORS; v++) begin
      big = (v % 10 == 9);
      foreach (u[i]) begin
        u[i]  = big ? DW'($signed($urandom % (200 << FW)) - (100 << FW))
                    : DW'($signed($urandom % (4 << FW)) - (2 << FW));
        ui[i] = wide_t'(u[i]);
        ur[i] = to_real(ui[i], FW);
      end
      ref_fixed(ui, ye);
      @(negedge clk);
      in_valid = 1'b1;
      // wait for acceptance
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      t_acc = 0;
      // keep in_valid high for a while on some vectors: must stall, not restart
      if (v % 3 != 0) begin
        @(negedge clk);
        in_valid = 1'b0;
      end
      lat = 0;
      do begin
        @(posedge clk); #1; lat++;
        if (v % 3 == 0 && lat == 3) in_valid = 1'b0;
      end while (!out_valid && lat < LATENCY + 5);
      checks++;
      if (lat != LATENCY) begin
        failures++;
        $display("FAIL vector %0d latency %0d expected %0d", v, lat, LATENCY);
      end
      for (int p = 0; p < P; p++) begin
        checks++;
        if (wide_t'(y[p]) !== ye[p]) begin
          failures++;
          $display("FAIL vector %0d y%0d=%h expected %h", v, p, y[p], ye[p][DW-1:0]);
        end
      end
      if (!big) begin
        ref_real(ur, yr);
        for (int p = 0; p < P; p++) begin
          real e;
          e = to_real(wide_t'(y[p]), FW) - yr[p];
          sig_pow[p] += yr[p] * yr[p];
          err_pow[p] += e * e;
        end
      end
      repeat ($urandom % 3) @(negedge clk);
    end
    for (int p = 0; p < P; p++) begin
      real snr;
      snr = 10.0 * $log10(sig_pow[p] / (err_pow[p] + 1.0e-300));
      $display("y%0d SNR vs double precision: %0.2f dB", p, snr);
      checks++;
      if (snr < 35.0) begin
        failures++;
        $display("FAIL y%0d SNR below 35 dB", p);
      end
    end
    $display("mechanisms: input_load=%0d feedback=%0d linear_output=%0d tanh_clamp=%0d saturation=%0d stall=%0d",
             n_load, n_feedback, n_linear, n_clamp, n_sat, n_stall);
    checks++;
    if (n_load == 0 || n_feedback == 0 || n_linear == 0 || n_clamp == 0 || n_sat == 0 || n_stall == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
