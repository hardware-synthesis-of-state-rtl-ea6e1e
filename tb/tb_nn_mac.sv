// tb_nn_mac -- self-checking test of the multiply-accumulate unit with three
// multipliers: random signed operands, sums started with clear+en, continued
// with en, zeroed with clear alone and held when idle, compared with a model
// that accumulates the same products in 128-bit integers.
module tb_nn_mac;
  import tb_nn_ref_pkg::*;

  localparam int unsigned DW = 24, NM = 3, AW = 2 * DW + 4;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, en = 1'b0;
  logic signed [DW-1:0] a [NM];
  logic signed [DW-1:0] b [NM];
  logic signed [AW-1:0] acc;
  wide_t model;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  nn_mac #(.DATA_W(DW), .NUM_MULT(NM), .ACC_W(AW)) dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = 0;
    foreach (a[m]) begin a[m] = '0; b[m] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 1000; t++) begin
      wide_t prods;
      @(negedge clk);
      foreach (a[m]) begin
        // mix full-scale extremes with random values
        case ($urandom % 4)
          0:       a[m] = {1'b1, {(DW-1){1'b0}}};
          1:       a[m] = {1'b0, {(DW-1){1'b1}}};
          default: a[m] = DW'($urandom);
        endcase
        b[m] = DW'($urandom);
      end
      en    = ($urandom % 5) != 0;
      clear = ($urandom % 6) == 0;
      prods = 0;
      foreach (a[m]) prods += wide_t'(a[m]) * wide_t'(b[m]);
      if (en && clear) model = prods;
      else if (en)     model = model + prods;
      else if (clear)  model = 0;
      @(posedge clk);
      #1;
      checks++;
      if (sext(wide_t'(acc), AW) !== sext(model, AW)) begin
        failures++;
        $display("FAIL t=%0d acc=%h expected %h", t, acc, model[AW-1:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
