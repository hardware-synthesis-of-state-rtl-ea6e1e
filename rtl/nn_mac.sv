// nn_mac -- multiply-accumulate unit of one node.
//
// Each enabled cycle multiplies NUM_MULT signed operand pairs (state element
// times weight), sums the products in an adder tree and adds the sum to the
// accumulator. A node whose fan-in is M finishes one layer in ceil(M/NUM_MULT)
// cycles, so NUM_MULT trades multipliers against cycles per layer, as the
// number-of-multipliers setting of the generator described with the design
// does; its default (NUM_MULT = M, one cycle per layer) is this design's own
// choice. Products and the accumulator keep full precision; rescaling is done
// by the node.
//
// Interface: en adds this cycle's products; clear together with en starts a
// new sum with them (the old sum is dropped); clear alone zeroes the
// accumulator. acc is registered: it shows the sum one cycle after the last
// enabled cycle.
module nn_mac
  import nn_pkg::*;
#(
  parameter int unsigned DATA_W   = NN_DATA_W,
  parameter int unsigned NUM_MULT = NN_NUM_MULT,
  parameter int unsigned ACC_W    = 2*NN_DATA_W + 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     en,
  input  logic signed [DATA_W-1:0] a   [NUM_MULT],
  input  logic signed [DATA_W-1:0] b   [NUM_MULT],
  output logic signed [ACC_W-1:0]  acc
);

  logic signed [ACC_W-1:0] prod_sum;

  always_comb begin
    prod_sum = '0;
    for (int m = 0; m < NUM_MULT; m++) begin
      prod_sum += ACC_W'(a[m]) * ACC_W'(b[m]);  // operands widened first: full-precision product
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           acc <= '0;
    else if (en && clear) acc <= prod_sum;
    else if (en)          acc <= acc + prod_sum;
    else if (clear)       acc <= '0;
  end

endmodule
