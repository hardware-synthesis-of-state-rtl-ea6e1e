// tb_nn_deep -- the two deep networks of the generator demonstration:
// 8 inputs, 8 outputs and 14 or 31 fully connected hidden layers of 32 tanh
// nodes, each run on one shared layer of 32 nodes. The 14-layer network
// uses 32 multipliers per node (one MAC cycle per layer), the 31-layer one
// 8 multipliers per node (four MAC cycles per layer), so both the parallel
// and the chunked multiply-accumulate are exercised at full size.
//
// Weights (in [-1/4, 1/4), 24-bit Q8.16) are generated by a hash of the word
// index and written straight into every node's ROM, which is built with an
// empty WEIGHT_FILE. Inputs are random in [-2, 2). Every output is compared
// bit-exactly with the reference model, and the latency
// (N+1)*(ceil(32/NUM_MULT)+1) cycles is checked for each vector.
module tb_nn_deep;
  import nn_pkg::*;
  import tb_nn_ref_pkg::*;

  localparam int unsigned L = 8, M = 32, P = 8, DW = 24, FW = 16;
  localparam int unsigned VECTORS = 40;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // Weight of word w of configuration cfg: xorshift hash mapped to [-1/4, 1/4)
  function automatic logic [DW-1:0] gen_word(input int cfg, input int w);
    logic [31:0] h;
    h = 32'(w) * 32'h9E3779B1 + 32'(cfg) * 32'h85EBCA77 + 32'h27D4EB2F;
    h ^= h >> 15; h *= 32'h2C1B3C6D; h ^= h >> 12; h *= 32'h297A2D39; h ^= h >> 15;
    return DW'($signed({{(DW-15){h[14]}}, h[14:0]}) >>> 1);   // +/- 2^14 = +/- 0.25
  endfunction

  initial begin : watchdog
    repeat (VECTORS * 300 + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int done_cnt = 0;

  for (genvar c = 0; c < 2; c++) begin : g_cfg
    localparam int unsigned N  = (c == 0) ? 14 : 31;
    localparam int unsigned NM = (c == 0) ? 32 : 8;
    localparam int unsigned LATENCY = (N + 1) * ((M + NM - 1) / NM + 1);
    localparam int unsigned WORDS = (N + 1) * M * (M + 1);

    logic in_valid = 1'b0, in_ready, out_valid;
    logic signed [DW-1:0] u [L];
    logic signed [DW-1:0] y [P];

    nn_top #(.L(L), .N(N), .M(M), .P(P), .DATA_W(DW), .FRAC_W(FW), .NUM_MULT(NM),
             .WEIGHT_FILE("")) dut (
      .clk (clk), .rst_n (rst_n), .in_valid (in_valid), .in_ready (in_ready),
      .u (u), .out_valid (out_valid), .y (y)
    );

    // fill every node's ROM before reset is released
    for (genvar i = 0; i < M; i++) begin : g_fill
      initial begin
        #1;
        for (int w = 0; w < WORDS; w++) dut.g_node[i].u_node.u_rom.image[w] = gen_word(c, w);
      end
    end

    function automatic wide_t wgt(input int k, input int i, input int j);
      return sext(wide_t'(gen_word(c, widx(k, i, j, M))), DW);
    endfunction

    task automatic ref_net(input wide_t uin[], output wide_t yout[]);
      wide_t x[], xn[], ws[];
      x = new[M]; xn = new[M]; ws = new[M];
      for (int i = 0; i < M; i++) x[i] = (i < L) ? uin[i] : 0;
      for (int k = 0; k <= N; k++) begin
        for (int i = 0; i < M; i++) begin
          for (int j = 0; j < M; j++) ws[j] = wgt(k, i, j);
          xn[i] = node_q(x, ws, wgt(k, i, M), k == N, DW, FW, NN_LUT_ADDR_W, NN_LUT_RANGE_LOG2);
        end
        x = xn;
        xn = new[M];
      end
      yout = new[P];
      for (int p = 0; p < P; p++) yout[p] = x[p];
    endtask

    initial begin
      wide_t ui[], ye[];
      int lat, nonzero;
      ui = new[L];
      foreach (u[i]) u[i] = '0;
      wait (rst_n);
      nonzero = 0;
      for (int v = 0; v < VECTORS; v++) begin
        foreach (u[i]) begin
          u[i]  = DW'($signed($urandom % (4 << FW)) - (2 << FW));
          ui[i] = wide_t'(u[i]);
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
          $display("FAIL N=%0d vector %0d latency %0d expected %0d", N, v, lat, LATENCY);
        end
        for (int p = 0; p < P; p++) begin
          checks++;
          if (y[p] != 0) nonzero++;
          if (wide_t'(y[p]) !== ye[p]) begin
            failures++;
            $display("FAIL N=%0d vector %0d y%0d=%h expected %h", N, v, p, y[p], ye[p][DW-1:0]);
          end
        end
      end
      // outputs must not have collapsed to zero through the depth
      checks++;
      if (nonzero < VECTORS * P / 2) begin
        failures++;
        $display("FAIL N=%0d: only %0d nonzero outputs", N, nonzero);
      end
      $display("network 8-%0dx32-8 (%0d multipliers/node): %0d vectors, latency %0d cycles",
               N, NM, VECTORS, LATENCY);
      done_cnt++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done_cnt == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
