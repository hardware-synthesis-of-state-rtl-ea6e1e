// tb_nn_tanh_lut -- self-checking test of the tanh look-up table: every
// table entry, points at and around the +/-4 clamping edges and random
// inputs over the whole word range are compared with the reference table
// model; the table is also checked against the exact tanh (error below the
// table step plus one LSB) and for odd symmetry.
module tb_nn_tanh_lut;
  import tb_nn_ref_pkg::*;

  localparam int unsigned DW = 24, FW = 16, AW = 10, RL2 = 2;

  logic signed [DW-1:0] z, y;
  int checks = 0, failures = 0;

  nn_tanh_lut #(.DATA_W(DW), .FRAC_W(FW), .ADDR_W(AW), .RANGE_LOG2(RL2)) dut (.*);

  task automatic try(input logic signed [DW-1:0] v);
    wide_t e;
    real   err;
    z = v;
    #1;
    e = tanh_q(wide_t'(v), DW, FW, AW, RL2);
    checks++;
    if (wide_t'(y) !== e) begin
      failures++;
      $display("FAIL z=%h: y=%h expected %h", v, y, e[DW-1:0]);
    end
    err = to_real(wide_t'(y), FW) - $tanh(to_real(wide_t'(v), FW));
    if (err < 0.0) err = -err;
    checks++;
    // |d tanh/dx| <= 1: table step 1/128, half-step sampling, plus rounding
    if (err > 1.0 / 128.0 + 2.0 ** (-FW)) begin
      failures++;
      $display("FAIL z=%h: table error %f too large", v, err);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [DW-1:0] yp;
    // one point inside every table interval
    for (int i = 0; i < (1 << AW); i++) try(DW'(-(4 << FW) + i * (1 << (FW - 7)) + 37));
    // clamping edges
    try(DW'(4 << FW)); try(DW'((4 << FW) - 1)); try(DW'(-(4 << FW))); try(DW'(-(4 << FW) - 1));
    try({1'b0, {(DW-1){1'b1}}}); try({1'b1, {(DW-1){1'b0}}}); try('0);
    // random
    repeat (3000) try(DW'($urandom));
    // odd symmetry: tanh(-z) == -tanh(z) for z at interval centres
    for (int i = 0; i < 200; i++) begin
      logic signed [DW-1:0] v;
      v = DW'(($urandom % (4 << FW)) & ~((1 << (FW - 7)) - 1)) + DW'(1 << (FW - 8));
      z = v; #1; yp = y;
      z = -v; #1;
      checks++;
      if (y !== -yp) begin
        failures++;
        $display("FAIL symmetry at %h: %h vs %h", v, yp, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
