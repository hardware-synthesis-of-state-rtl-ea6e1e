// tb_nn_controller -- self-checking test of the control FSM with N = 4 and
// three MAC cycles per layer. For each accepted input it checks, cycle by
// cycle, the expected sequence of layer/chunk addresses, mac_clear/mac_en,
// the input load, the feedback write-backs, the output capture, the
// out_valid pulse (N+1)*(CHUNKS+1) cycles after the input was taken) and
// that in_ready stays low while a vector is being processed.
module tb_nn_controller;
  import nn_pkg::*;

  localparam int unsigned N = 4, CHUNKS = 3;
  localparam int unsigned LAYER_W = $clog2(N + 1);
  localparam int unsigned CHUNK_W = (CHUNKS > 1) ? $clog2(CHUNKS) : 1;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic in_ready, state_load, mac_clear, mac_en, out_layer, y_load, out_valid;
  state_sel_e state_sel;
  logic [LAYER_W-1:0] layer;
  logic [CHUNK_W-1:0] chunk;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  nn_controller #(.N(N), .CHUNKS(CHUNKS)) dut (.*);

  task automatic expect_eq(input int got, input int exp_v, input string what, input int cyc);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("FAIL cycle %0d %s: %0d expected %0d", cyc, what, got, exp_v);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < 20; v++) begin
      int gap, cyc;
      gap = $urandom % 3;
      // idle cycles: ready, nothing happens
      repeat (gap) begin
        @(negedge clk);
        expect_eq(in_ready, 1, "idle in_ready", -1);
        expect_eq(state_load, 0, "idle state_load", -1);
        expect_eq(mac_en, 0, "idle mac_en", -1);
      end
      @(negedge clk);
      in_valid = 1'b1;
      #1;
      expect_eq(in_ready, 1, "in_ready", 0);
      expect_eq(state_load, 1, "input load", 0);
      expect_eq(state_sel, SEL_INPUT, "input select", 0);
      @(negedge clk);
      in_valid = 1'b1;   // held high: must be ignored while busy
      cyc = 1;
      for (int k = 0; k <= N; k++) begin
        for (int c = 0; c < CHUNKS; c++) begin
          expect_eq(in_ready, 0, "busy in_ready", cyc);
          expect_eq(mac_en, 1, "mac_en", cyc);
          expect_eq(mac_clear, c == 0, "mac_clear", cyc);
          expect_eq(int'(chunk), c, "chunk", cyc);
          expect_eq(int'(layer), k, "layer", cyc);
          expect_eq(state_load, 0, "no load during MAC", cyc);
          expect_eq(out_layer, k == N, "out_layer", cyc);
          @(negedge clk); cyc++;
        end
        expect_eq(mac_en, 0, "act mac_en", cyc);
        expect_eq(int'(layer), k, "act layer", cyc);
        expect_eq(state_load, k < N, "write-back", cyc);
        expect_eq(state_sel, SEL_FEEDBACK, "feedback select", cyc);
        expect_eq(y_load, k == N, "y_load", cyc);
        expect_eq(out_valid, 0, "out_valid early", cyc);
        @(negedge clk); cyc++;
      end
      in_valid = 1'b0;
      expect_eq(out_valid, 1, "out_valid", cyc);
      expect_eq(cyc, (N + 1) * (CHUNKS + 1) + 1, "latency", cyc);
      expect_eq(in_ready, 1, "ready after result", cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
