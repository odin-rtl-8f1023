// maxpool4: 4:1 8-bit max pooling of the ODIN bank.
//
// Takes one 32-bit slice of the read buffer, i.e. four adjacent 8-bit unsigned operands, and
// returns the largest of them. Two levels of comparators, purely combinational. The pooling
// window is therefore laid out by software as four neighbouring operands of one block.
//
// The 4:1 ratio, the 8-bit width and the 32-bit slice follow the source; the comparator tree is
// this design's own.
module maxpool4
  import odin_pkg::*;
(
  input  logic [4*OP_BITS-1:0] slice,
  output op_t                  max_out
);
  op_t m01, m23;
  always_comb begin
    m01     = (slice[15:8]  > slice[7:0])   ? slice[15:8]  : slice[7:0];
    m23     = (slice[31:24] > slice[23:16]) ? slice[31:24] : slice[23:16];
    max_out = (m23 > m01) ? m23 : m01;
  end
endmodule
