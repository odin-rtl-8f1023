// relu8: 8-bit ReLU activation of the ODIN bank, applied to each value leaving the pop counter.
//
// Values in the bank are unsigned 8-bit codes (a pop count of a 256-bit stochastic stream).
// For such asymmetrically quantised data the real-valued ReLU max(x, 0) becomes max(q, zp),
// where zp is the code that stands for zero; with zp = 0 every code passes unchanged. The block
// is purely combinational.
//
// The source asks for an 8-bit ReLU after the pop counter; the zero-point form is this design's
// choice, made because an unsigned stochastic count is never negative.
module relu8
  import odin_pkg::*;
(
  input  op_t x,
  input  op_t zp,
  output op_t y
);
  always_comb y = (x < zp) ? zp : x;
endmodule
