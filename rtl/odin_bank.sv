// odin_bank: one ODIN PCRAM bank with its in-memory computing additions.
//
// The bank is an ordinary PCRAM bank (pcram_array: partitions, decoders, sense amplifiers,
// write drivers) with three kinds of change:
//   - PINATUBO-style sense amplifiers that AND or OR two rows opened together, used for
//     stochastic multiplication (AND) and, with prepared rows S and S' = not S, for scaled
//     addition (two ANDs and an OR);
//   - add-on logic between the read and write buffers: the SRAM lookup table that turns an
//     8-bit operand into a 256-bit stochastic stream, the PISO pop counter that turns a stream
//     back into 8 bits, an 8-bit ReLU after the counter and a 4:1 max-pooling unit;
//   - control logic (bank_control) that runs each command's activity flow.
// One partition is kept free by software as the compute partition for the stochastic rows;
// the hardware does not enforce where operands live.
//
// Interface: a command (one-hot control lines plus addresses) on cmd_valid/cmd_ready; done stays
// high until rsp_ack, with rdata holding the read buffer (the line of a READ). The lookup-table
// write port is brought out so the table can be reprogrammed. arr_busy is high in every cycle
// the array is occupied, for counting array time.
//
// The block structure and the data paths (Fig.-4-style: read buffer -> 256:8 mux -> table ->
// write buffer; read buffer -> PISO counter -> ReLU -> 8:256 demux; read buffer -> 256:32 mux ->
// pooling -> demux) follow the source; the handshakes are this design's choice.
module odin_bank
  import odin_pkg::*;
#(
  parameter int unsigned PARTITIONS = 16,
  parameter int unsigned ROWS       = 4096,
  parameter int unsigned T_RD       = 48,
  parameter int unsigned T_WR       = 60
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  bank_cmd_t cmd,
  output logic      done,
  input  logic      rsp_ack,
  output line_t     rdata,
  input  logic      lut_wr_en,
  input  op_t       lut_wr_addr,
  input  line_t     lut_wr_data,
  output logic      arr_busy
);
  logic       arr_req_valid, arr_req_ready, arr_rsp_valid, arr_wdata_from_sa;
  arr_op_e    arr_req_op;
  wl_t        arr_wl_a, arr_wl_b;
  blk_t       arr_blk;
  line_t      arr_rdata, wb_dout, rb_dout, lut_row;
  logic       rb_load, lut_rd_en, pc_load, pc_done, pc_busy;
  logic [4:0] rb_op_sel, wb_slot_sel;
  logic [2:0] rb_slice_sel;
  logic       wb_line_load, wb_line_from_host, wb_slot_we, wb_slot_from_pool;
  op_t        rb_op, pc_count, relu_out, pool_out, zp;
  logic [31:0] rb_slice;

  bank_control u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done, .rsp_ack,
    .arr_req_valid, .arr_req_ready, .arr_req_op, .arr_wl_a, .arr_wl_b, .arr_blk,
    .arr_wdata_from_sa, .arr_rsp_valid,
    .rb_load, .rb_op_sel, .rb_slice_sel, .lut_rd_en, .pc_load, .pc_done,
    .wb_line_load, .wb_line_from_host, .wb_slot_we, .wb_slot_sel, .wb_slot_from_pool, .zp
  );

  pcram_array #(.PARTITIONS(PARTITIONS), .ROWS(ROWS), .T_RD(T_RD), .T_WR(T_WR)) u_array (
    .clk, .rst_n,
    .req_valid (arr_req_valid),
    .req_ready (arr_req_ready),
    .req_op    (arr_req_op),
    .req_wl_a  (arr_wl_a),
    .req_wl_b  (arr_wl_b),
    .req_blk   (arr_blk),
    .req_wdata (arr_wdata_from_sa ? arr_rdata : wb_dout),
    .rsp_valid (arr_rsp_valid),
    .rsp_rdata (arr_rdata)
  );
  assign arr_busy = !arr_req_ready || arr_req_valid;

  read_buffer u_rb (
    .clk, .rst_n, .load(rb_load), .din(arr_rdata), .op_sel(rb_op_sel),
    .slice_sel(rb_slice_sel), .dout(rb_dout), .op_out(rb_op), .slice_out(rb_slice)
  );
  assign rdata = rb_dout;

  sram_lut_sng u_lut (
    .clk, .rd_en(lut_rd_en), .rd_addr(rb_op), .row_buf(lut_row),
    .wr_en(lut_wr_en), .wr_addr(lut_wr_addr), .wr_data(lut_wr_data)
  );

  pop_counter u_pc (
    .clk, .rst_n, .load(pc_load), .din(rb_dout), .busy(pc_busy), .done(pc_done),
    .count(pc_count)
  );

  relu8 u_relu (.x(pc_count), .zp(zp), .y(relu_out));

  maxpool4 u_pool (.slice(rb_slice), .max_out(pool_out));

  write_buffer u_wb (
    .clk, .rst_n,
    .line_load (wb_line_load),
    .line_din  (wb_line_from_host ? cmd.args.wdata : lut_row),
    .slot_we   (wb_slot_we),
    .slot_sel  (wb_slot_sel),
    .slot_din  (wb_slot_from_pool ? pool_out : relu_out),
    .dout      (wb_dout)
  );

  // The pop counter is only loaded when idle.
  assert property (@(posedge clk) disable iff (!rst_n) pc_load |-> !pc_busy);
endmodule
