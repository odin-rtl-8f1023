// read_buffer: the 256-bit read buffer of an ODIN bank with its two output multiplexers.
//
// The buffer captures the sensed line when load is high. Two selects then pick from it without
// another array access: op_sel (256:8 mux) picks one of the 32 operands, which indexes the
// binary-to-stochastic lookup table; slice_sel (256:32 mux) picks one of eight 32-bit slices,
// four operands that feed the max-pooling unit. Operand i is bits [8i+7:8i].
//
// Timing: dout, op_out and slice_out change the cycle after load. Buffer and mux widths follow
// the source; the bit order is this design's choice.
module read_buffer
  import odin_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  line_t       din,
  input  logic [4:0]  op_sel,
  input  logic [2:0]  slice_sel,
  output line_t       dout,
  output op_t         op_out,
  output logic [31:0] slice_out
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    dout <= '0;
    else if (load) dout <= din;
  end
  assign op_out    = dout[op_sel*OP_BITS +: OP_BITS];
  assign slice_out = dout[slice_sel*32 +: 32];
endmodule
