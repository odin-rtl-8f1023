// pcram_partition: behavioural model of one PCRAM partition, 4096 wordlines by 8192 bitlines,
// with its local wordline decoder and its 8kb:256b column multiplexer.
//
// Two wordlines can be selected at once (row_a and row_b) so that the bank's modified sense
// amplifiers can compute on both; the selected 256-bit column block of each row is presented
// combinationally on cell_a and cell_b. A write stores one 256-bit block into one row at the
// clock edge when we is high. The PCRAM cell physics (set/reset pulses, resistance drift) is
// not modelled; latency is added by pcram_array.
//
// Array size follows the source (4096 x 8 kb per partition); nothing is reset, as in a memory.
module pcram_partition
  import odin_pkg::*;
#(
  parameter int unsigned ROWS     = 4096,
  parameter int unsigned ROW_BITS = PARTITION_BITS_PER_ROW
) (
  input  logic                       clk,
  input  logic [$clog2(ROWS)-1:0]    row_a,
  input  logic [$clog2(ROWS)-1:0]    row_b,
  input  blk_t                       blk,
  output line_t                      cell_a,
  output line_t                      cell_b,
  input  logic                       we,
  input  logic [$clog2(ROWS)-1:0]    wr_row,
  input  blk_t                       wr_blk,
  input  line_t                      wdata
);
  logic [ROW_BITS-1:0] mem [ROWS];

  assign cell_a = mem[row_a][blk*LINE_BITS +: LINE_BITS];
  assign cell_b = mem[row_b][blk*LINE_BITS +: LINE_BITS];

  always_ff @(posedge clk) begin
    if (we) mem[wr_row][wr_blk*LINE_BITS +: LINE_BITS] <= wdata;
  end
endmodule
