// nn_tanh_lut -- tanh activation as a look-up table ROM.
//
// The activation of the hidden-layer nodes is tanh(.), realised as a ROM
// whose contents are computed once, before operation, and never written
// (the design keeps tanh samples in a ROM; the sampling below is this
// implementation's choice). The table has 2**AW entries evenly spaced over
// [-R, +R) with R = 2**RANGE_LOG2 (default 4, where tanh is already within
// 0.07 % of +/-1). Entry i holds tanh evaluated at the centre of its
// interval, x_i = -R + (i + 0.5) * 2R / 2**AW, rounded to the data format.
// Inputs below -R use entry 0, inputs at or above +R the last entry; inside
// the range the address is (z + R) truncated to the table step.
//
// Interface: purely combinational, y = tanh_table(z). z and y use the same
// two's-complement format with FRAC_W fraction bits.
module nn_tanh_lut
  import nn_pkg::*;
#(
  parameter int unsigned DATA_W     = NN_DATA_W,
  parameter int unsigned FRAC_W     = NN_FRAC_W,
  parameter int unsigned ADDR_W     = NN_LUT_ADDR_W,
  parameter int unsigned RANGE_LOG2 = NN_LUT_RANGE_LOG2
) (
  input  logic signed [DATA_W-1:0] z,
  output logic signed [DATA_W-1:0] y
);

  localparam int unsigned SPAN_LOG2 = RANGE_LOG2 + 1;                 // table spans 2R
  // A table finer than the data resolution would repeat entries: cap it.
  localparam int unsigned AW        = (ADDR_W < FRAC_W + SPAN_LOG2) ? ADDR_W : FRAC_W + SPAN_LOG2;
  localparam int unsigned SHIFT     = FRAC_W + SPAN_LOG2 - AW;         // data LSBs per table step
  localparam int unsigned EXT_W     = ((DATA_W > FRAC_W + SPAN_LOG2) ? DATA_W : FRAC_W + SPAN_LOG2) + 2;
  localparam int unsigned DEPTH     = 1 << AW;

  localparam logic signed [EXT_W-1:0] RANGE_Q = EXT_W'(1) << (FRAC_W + RANGE_LOG2);  // R
  localparam logic signed [EXT_W-1:0] SPAN_Q  = EXT_W'(1) << (FRAC_W + SPAN_LOG2);   // 2R

  // ROM contents: tanh sampled at the interval centres, rounded to nearest.
  // Evaluated at elaboration; only the integer table reaches the hardware.
  function automatic logic [DEPTH*DATA_W-1:0] tanh_table();
    logic [DEPTH*DATA_W-1:0] tbl;
    real pos, scaled, max_pos;
    max_pos = 2.0 ** (DATA_W - 1) - 1.0;
    for (int i = 0; i < DEPTH; i++) begin
      pos    = (real'(i) + 0.5) * (2.0 ** SPAN_LOG2) / real'(DEPTH) - 2.0 ** RANGE_LOG2;
      scaled = $tanh(pos) * (2.0 ** FRAC_W);
      if (scaled >  max_pos) scaled =  max_pos;
      if (scaled < -max_pos) scaled = -max_pos;
      tbl[i*DATA_W +: DATA_W] = DATA_W'(longint'(scaled));
    end
    return tbl;
  endfunction

  localparam logic [DEPTH*DATA_W-1:0] TABLE = tanh_table();

  logic signed [DATA_W-1:0] rom [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) rom[i] = TABLE[i*DATA_W +: DATA_W];
  end

  logic signed [EXT_W-1:0] offset;   // z + R
  logic        [AW-1:0]    addr;

  always_comb begin
    offset = EXT_W'(z) + RANGE_Q;
    if (offset < 0)            addr = '0;
    else if (offset >= SPAN_Q) addr = '1;
    else                       addr = AW'(offset >>> SHIFT);
  end

  assign y = rom[addr];

endmodule
