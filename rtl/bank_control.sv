// bank_control: the control logic added to each ODIN PCRAM bank. It runs one command at a time
// as a sequence of array reads and writes and of steering signals for the bank's add-on logic.
//
// Command flows (a, b, d are line addresses {partition,row,block}; "row + i" means wordline
// + i, same block):
//   READ      read a into the read buffer; return it.
//   WRITE     host line into the write buffer; write it to d.
//   B_TO_S    read block a (32 binary operands) into the read buffer; for i = 0..31 pick operand
//             i (256:8 mux), look it up in the SRAM table, move the 256-bit row into the write
//             buffer and write it to row d + i.
//   ANN_MUL   open rows a and b together with the AND reference; write the sensed line straight
//             from the sense amplifiers to d (read and write buffers are joined).
//   ANN_ACC   the same with the OR reference. The two AND products acc.S and op.S' of a
//             stochastic addition are made beforehand with ANN_MUL.
//   S_TO_B    for j = 0..31 read row a + j, load it into the pop counter, wait 256 clocks, pass
//             the count through ReLU (zero point zp) into slot j of the write buffer; then write
//             the assembled block to d.
//   ANN_POOL  for j = 0..3 read line a + j; for k = 0..7 max-pool slice k into slot 8j + k of
//             the write buffer; then write the block to d.
//
// Interface: cmd_valid/cmd_ready accept a command (ready only when idle and no result is
// waiting); done stays high from the end of the command until rsp_ack. The array port is a
// valid/ready request with a one-cycle rsp_valid.
//
// Timing: an ANN_MUL or ANN_ACC keeps the array busy for exactly one read plus one write
// (T_RD + T_WR = 108 cycles), the write issued in the cycle the sensed line arrives; done is
// seen T_RD + T_WR + 2 cycles after the command was accepted (one cycle to take the command,
// one to register done). The flows, their loop counts
// and the parts they pass through follow the source; the exact cycle schedule (no overlap of
// pop counting with the next array read) is this design's choice.
module bank_control
  import odin_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  // command port
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  bank_cmd_t cmd,
  output logic      done,
  input  logic      rsp_ack,
  // array port
  output logic      arr_req_valid,
  input  logic      arr_req_ready,
  output arr_op_e   arr_req_op,
  output wl_t       arr_wl_a,
  output wl_t       arr_wl_b,
  output blk_t      arr_blk,
  output logic      arr_wdata_from_sa,
  input  logic      arr_rsp_valid,
  // read buffer
  output logic      rb_load,
  output logic [4:0] rb_op_sel,
  output logic [2:0] rb_slice_sel,
  // lookup table
  output logic      lut_rd_en,
  // pop counter
  output logic      pc_load,
  input  logic      pc_done,
  // write buffer
  output logic      wb_line_load,
  output logic      wb_line_from_host,
  output logic      wb_slot_we,
  output logic [4:0] wb_slot_sel,
  output logic      wb_slot_from_pool,
  output op_t       zp
);
  typedef enum logic [3:0] {
    S_IDLE,
    S_RD_ISSUE,   // issue the sensing operation of the current step
    S_RD_WAIT,
    S_LUT,        // B_TO_S: table lookup of operand i
    S_LUT_WB,     // B_TO_S: table row into write buffer
    S_PC_WAIT,    // S_TO_B: pop counting
    S_POOL,       // ANN_POOL: slice k into slot 8j + k
    S_WR_ISSUE,
    S_WR_WAIT,
    S_DONE
  } state_e;

  state_e state;
  ctl_t   ctl;
  args_t  args;
  logic [5:0] idx;  // i or j
  logic [2:0] k;

  assign cmd_ready = (state == S_IDLE);
  assign done      = (state == S_DONE);
  assign zp        = args.zp;

  // ANN_MUL / ANN_ACC: the write follows the sensing in the very next cycle.
  logic wr_direct;
  assign wr_direct = ctl.ann_mul | ctl.ann_acc;

  // Address of the current step.
  wl_t  rd_wl;
  laddr_t pool_addr;
  always_comb begin
    pool_addr = args.a + LADDR_W'(idx);
    if (ctl.ann_pool)    rd_wl = wl_of(pool_addr);
    else if (ctl.s_to_b) rd_wl = wl_of(args.a) + WL_W'(idx);
    else                 rd_wl = wl_of(args.a);
  end

  always_comb begin
    arr_req_valid     = 1'b0;
    arr_req_op        = ARR_READ;
    arr_wl_a          = rd_wl;
    arr_wl_b          = wl_of(args.b);
    arr_blk           = ctl.ann_pool ? blk_of(pool_addr) : blk_of(args.a);
    arr_wdata_from_sa = ctl.ann_mul | ctl.ann_acc;
    if (state == S_RD_ISSUE) begin
      arr_req_valid = 1'b1;
      arr_req_op    = ctl.ann_mul ? ARR_AND : (ctl.ann_acc ? ARR_OR : ARR_READ);
    end else if (state == S_WR_ISSUE || (state == S_RD_WAIT && arr_rsp_valid && wr_direct)) begin
      arr_req_valid = 1'b1;
      arr_req_op    = ARR_WRITE;
      arr_wl_a      = ctl.b_to_s ? wl_of(args.d) + WL_W'(idx) : wl_of(args.d);
      arr_blk       = blk_of(args.d);
    end
  end

  always_comb begin
    rb_load           = (state == S_RD_WAIT) && arr_rsp_valid && !(ctl.ann_mul || ctl.ann_acc);
    rb_op_sel         = idx[4:0];
    rb_slice_sel      = k;
    lut_rd_en         = (state == S_LUT);
    wb_line_load      = (state == S_LUT_WB) || (cmd_valid && cmd_ready && cmd.ctl.wr);
    wb_line_from_host = (state == S_IDLE);
    wb_slot_we        = (state == S_POOL) || (state == S_PC_WAIT && pc_done);
    wb_slot_sel       = ctl.ann_pool ? {idx[1:0], k} : idx[4:0];
    wb_slot_from_pool = ctl.ann_pool;
  end

  // The pop counter loads from the read buffer the cycle after the buffer was filled.
  logic pc_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      ctl      <= '0;
      args     <= '0;
      idx      <= '0;
      k        <= '0;
      pc_start <= 1'b0;
    end else begin
      pc_start <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          ctl  <= cmd.ctl;
          args <= cmd.args;
          idx  <= '0;
          k    <= '0;
          state <= cmd.ctl.wr ? S_WR_ISSUE : S_RD_ISSUE;
        end
        S_RD_ISSUE: if (arr_req_ready) state <= S_RD_WAIT;
        S_RD_WAIT: if (arr_rsp_valid) begin
          if (wr_direct)                  state <= arr_req_ready ? S_WR_WAIT : S_WR_ISSUE;
          else if (ctl.b_to_s)            state <= S_LUT;
          else if (ctl.s_to_b) begin
            state    <= S_PC_WAIT;
            pc_start <= 1'b1;
          end
          else if (ctl.ann_pool)          state <= S_POOL;
          else                            state <= S_DONE;
        end
        S_LUT:    state <= S_LUT_WB;
        S_LUT_WB: state <= S_WR_ISSUE;
        S_PC_WAIT: if (pc_done) begin
          if (idx == 6'(OPS_PER_LINE - 1)) state <= S_WR_ISSUE;
          else begin
            idx   <= idx + 6'd1;
            state <= S_RD_ISSUE;
          end
        end
        S_POOL: begin
          k <= k + 3'd1;
          if (k == 3'd7) begin
            if (idx == 6'(POOL_IN_LINES - 1)) state <= S_WR_ISSUE;
            else begin
              idx   <= idx + 6'd1;
              state <= S_RD_ISSUE;
            end
          end
        end
        S_WR_ISSUE: if (arr_req_ready) state <= S_WR_WAIT;
        S_WR_WAIT: if (arr_rsp_valid) begin
          if (ctl.b_to_s && idx != 6'(OPS_PER_LINE - 1)) begin
            idx   <= idx + 6'd1;
            state <= S_LUT;
          end else begin
            state <= S_DONE;
          end
        end
        S_DONE: if (rsp_ack) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign pc_load = pc_start;

  // A command must name exactly one operation.
  assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && cmd_ready |-> $onehot(cmd.ctl));
endmodule
