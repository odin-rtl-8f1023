// write_buffer: the 256-bit write buffer of an ODIN bank, which feeds the write drivers.
//
// It is filled in one of two ways: a whole line at once (line_load, from the lookup table's row
// buffer or from the host), or one 8-bit slot at a time through an 8:256 demultiplexer
// (slot_we, slot_sel, slot_din), which is how the S_TO_B and ANN_POOL flows assemble 32 results
// into one block. A line load wins over a slot write in the same cycle.
//
// Timing: dout changes the cycle after a load. Widths follow the source; priority and slot bit
// order (slot i is bits [8i+7:8i]) are this design's choice.
module write_buffer
  import odin_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       line_load,
  input  line_t      line_din,
  input  logic       slot_we,
  input  logic [4:0] slot_sel,
  input  op_t        slot_din,
  output line_t      dout
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         dout <= '0;
    else if (line_load) dout <= line_din;
    else if (slot_we)   dout[slot_sel*OP_BITS +: OP_BITS] <= slot_din;
  end
endmodule
