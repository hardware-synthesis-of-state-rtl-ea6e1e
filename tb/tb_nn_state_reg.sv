// tb_nn_state_reg -- self-checking test of the input multiplexers and state
// registers: reset value, loading the zero-padded input vector, loading the
// fed-back node outputs, and holding when load is low.
module tb_nn_state_reg;
  import nn_pkg::*;

  localparam int unsigned L = 3, M = 4, DW = 24;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  state_sel_e sel = SEL_INPUT;
  logic signed [DW-1:0] u [L];
  logic signed [DW-1:0] x_fb [M];
  logic signed [DW-1:0] state [M];
  logic signed [DW-1:0] expect_q [M];

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  nn_state_reg #(.L(L), .M(M), .DATA_W(DW)) dut (.*);

  task automatic check_state(string what);
    for (int i = 0; i < M; i++) begin
      checks++;
      if (state[i] !== expect_q[i]) begin
        failures++;
        $display("FAIL %s lane %0d: got %h expected %h", what, i, state[i], expect_q[i]);
      end
    end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (u[i]) u[i] = DW'($urandom);
    foreach (x_fb[i]) x_fb[i] = DW'($urandom);
    repeat (2) @(posedge clk);
    #1;
    foreach (expect_q[i]) expect_q[i] = '0;
    check_state("reset");
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      foreach (u[i]) u[i] = DW'($urandom);
      foreach (x_fb[i]) x_fb[i] = DW'($urandom);
      load = ($urandom % 4) != 0;
      sel  = state_sel_e'($urandom % 2);
      if (load) begin
        for (int i = 0; i < M; i++) begin
          if (sel == SEL_FEEDBACK) expect_q[i] = x_fb[i];
          else                     expect_q[i] = (i < L) ? u[i] : '0;
        end
      end
      @(posedge clk);
      #1;
      check_state(load ? (sel == SEL_FEEDBACK ? "feedback load" : "input load") : "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
