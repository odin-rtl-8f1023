// pcram_array: behavioural model of the storage of one ODIN PCRAM bank: 16 partitions of
// 4096 x 8 kb cells, the global and local wordline decoders, the 8kb:256b column multiplexers,
// the 256 modified sense amplifiers and the 256 write drivers. This is a behavioural model of an
// analog, process-specific memory macro, not logic to synthesise.
//
// A request (req_valid && req_ready) names an operation, one or two wordlines ({partition,row})
// and a 256-bit column block. ARR_READ and ARR_NOT sense row a; ARR_AND and ARR_OR open rows a
// and b of row a's partition together and sense them through the PINATUBO-style amplifiers;
// ARR_WRITE stores wdata in row a. The array is busy for T_RD cycles for a sensing operation and
// T_WR cycles for a write, the accepting cycle included, and accepts nothing meanwhile. At the
// last busy cycle's edge rsp_valid pulses for one cycle; for a sensing operation rsp_rdata
// then holds the sensed line until the next sensing operation completes.
//
// The defaults T_RD = 48 and T_WR = 60 (cycles of a 1 GHz clock) are derived from the source's
// command latency table, which fits 48 ns per read and 60 ns per write exactly (1 read + 1
// write = 108 ns; 32 + 32 = 3456 ns; 33 + 32 = 3504 ns). Geometry follows the source.
// Restricting two-row operations to one partition is this design's reading of how shared local
// bitlines work.
module pcram_array
  import odin_pkg::*;
#(
  parameter int unsigned PARTITIONS = 16,
  parameter int unsigned ROWS       = 4096,
  parameter int unsigned T_RD       = 48,
  parameter int unsigned T_WR       = 60
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    req_valid,
  output logic    req_ready,
  input  arr_op_e req_op,
  input  wl_t     req_wl_a,
  input  wl_t     req_wl_b,
  input  blk_t    req_blk,
  input  line_t   req_wdata,
  output logic    rsp_valid,
  output line_t   rsp_rdata
);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned PW = (PARTITIONS > 1) ? $clog2(PARTITIONS) : 1;

  logic        busy;
  logic [7:0]  cnt;
  arr_op_e     op_q;
  wl_t         wl_a_q, wl_b_q;
  blk_t        blk_q;
  line_t       wdata_q;

  // Global wordline decode: partition select from the upper wordline bits.
  logic [PW-1:0] part_sel;
  logic [RW-1:0] row_a, row_b;
  assign part_sel = PW'(wl_a_q >> ROW_W);
  assign row_a    = RW'(wl_a_q);
  assign row_b    = RW'(wl_b_q);

  line_t    cell_a [PARTITIONS];
  line_t    cell_b [PARTITIONS];
  line_t    sa_out;
  sa_mode_e sa_mode;
  logic     finish;

  assign finish = busy && (cnt == 8'd1);

  for (genvar p = 0; p < PARTITIONS; p++) begin : g_part
    pcram_partition #(.ROWS(ROWS)) u_part (
      .clk    (clk),
      .row_a  (row_a),
      .row_b  (row_b),
      .blk    (blk_q),
      .cell_a (cell_a[p]),
      .cell_b (cell_b[p]),
      .we     (finish && op_q == ARR_WRITE && part_sel == PW'(p)),
      .wr_row (row_a),
      .wr_blk (blk_q),
      .wdata  (wdata_q)
    );
  end

  always_comb begin
    unique case (op_q)
      ARR_AND: sa_mode = SA_AND;
      ARR_OR:  sa_mode = SA_OR;
      ARR_NOT: sa_mode = SA_NOT;
      default: sa_mode = SA_READ;
    endcase
  end

  pinatubo_sense_amp u_sa (
    .mode   (sa_mode),
    .cell_a (cell_a[part_sel]),
    .cell_b (cell_b[part_sel]),
    .dout   (sa_out)
  );

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= '0;
      op_q      <= ARR_READ;
      wl_a_q    <= '0;
      wl_b_q    <= '0;
      blk_q     <= '0;
      wdata_q   <= '0;
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        busy    <= 1'b1;
        cnt     <= 8'((req_op == ARR_WRITE) ? T_WR - 1 : T_RD - 1);
        op_q    <= req_op;
        wl_a_q  <= req_wl_a;
        wl_b_q  <= req_wl_b;
        blk_q   <= req_blk;
        wdata_q <= req_wdata;
      end else if (busy) begin
        if (cnt == 8'd1) begin
          busy      <= 1'b0;
          rsp_valid <= 1'b1;
          if (op_q != ARR_WRITE) rsp_rdata <= sa_out;
        end else begin
          cnt <= cnt - 8'd1;
        end
      end
    end
  end

  initial begin
    assert (T_RD >= 2 && T_WR >= 2 && T_RD < 256 && T_WR < 256)
      else $error("pcram_array: T_RD and T_WR must lie in 2..255");
  end
endmodule
