// odin_channel: top level of the ODIN accelerator, the PCRAM memory channel whose banks compute
// neural-network layers in place.
//
// The channel holds NUM_BANKS ODIN banks behind one PIM controller. The host (through the
// memory controller and DMA engine, which are outside this design) first stores 8-bit weights
// and inputs with WRITE commands, then drives each layer as a series of PIM commands:
// B_TO_S turns a block of 32 operands into 32 stochastic rows of the compute partition,
// ANN_MUL ANDs two stochastic rows (multiply), ANN_ACC ORs two rows (the last step of a scaled
// addition whose two AND terms were made by ANN_MUL with the select rows S and S'), S_TO_B
// turns 32 stochastic results back into 8-bit values through the pop counter and ReLU, and
// ANN_POOL max-pools four blocks into one. Every bank can run its own command at the same time.
//
// Interface: host command port (host_valid/host_ready, host_cmd, host_bank, host_args), response
// port (rsp_valid/rsp_ready, rsp_bank, rsp_rdata), a lookup-table write port broadcast to all
// banks, and observation outputs stall (a command waits for a busy bank) and bank_busy (array
// occupied, per bank).
//
// Size follows the source: 8 ranks of 16 banks per channel, i.e. NUM_BANKS = 128, each bank
// 16 partitions x 4096 rows x 8 kb (64 Gb for the channel). Ranks are not modelled separately;
// banks are numbered 0..127. Each bank is as described in odin_bank. Timing: commands to
// different banks overlap completely; see bank_control for the cycle counts of each command.
module odin_channel
  import odin_pkg::*;
#(
  parameter int unsigned NUM_BANKS  = 128,
  parameter int unsigned PARTITIONS = 16,
  parameter int unsigned ROWS       = 4096,
  parameter int unsigned T_RD       = 48,
  parameter int unsigned T_WR       = 60
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          host_valid,
  output logic                          host_ready,
  input  cmd_e                          host_cmd,
  input  logic [$clog2(NUM_BANKS)-1:0]  host_bank,
  input  args_t                         host_args,
  output logic                          rsp_valid,
  input  logic                          rsp_ready,
  output logic [$clog2(NUM_BANKS)-1:0]  rsp_bank,
  output line_t                         rsp_rdata,
  input  logic                          lut_wr_en,
  input  op_t                           lut_wr_addr,
  input  line_t                         lut_wr_data,
  output logic                          stall,
  output logic [NUM_BANKS-1:0]          bank_busy
);
  logic [NUM_BANKS-1:0] bank_valid, bank_ready, bank_done, bank_ack;
  bank_cmd_t            bank_cmd;
  line_t                bank_rdata [NUM_BANKS];

  pimc #(.NUM_BANKS(NUM_BANKS)) u_pimc (
    .clk, .rst_n, .host_valid, .host_ready, .host_cmd, .host_bank, .host_args,
    .rsp_valid, .rsp_ready, .rsp_bank, .rsp_rdata, .stall,
    .bank_valid, .bank_ready, .bank_cmd, .bank_done, .bank_ack, .bank_rdata
  );

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    odin_bank #(.PARTITIONS(PARTITIONS), .ROWS(ROWS), .T_RD(T_RD), .T_WR(T_WR)) u_bank (
      .clk, .rst_n,
      .cmd_valid   (bank_valid[b]),
      .cmd_ready   (bank_ready[b]),
      .cmd         (bank_cmd),
      .done        (bank_done[b]),
      .rsp_ack     (bank_ack[b]),
      .rdata       (bank_rdata[b]),
      .lut_wr_en   (lut_wr_en),
      .lut_wr_addr (lut_wr_addr),
      .lut_wr_data (lut_wr_data),
      .arr_busy    (bank_busy[b])
    );
  end
endmodule
