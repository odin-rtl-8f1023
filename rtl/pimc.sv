// pimc: the PIM controller added to the memory controller of the ODIN channel.
//
// It takes host commands (a plain READ or WRITE, or one of the five PIM commands B_TO_S,
// ANN_MUL, ANN_ACC, S_TO_B, ANN_POOL) with a bank number and addresses, decodes the command into
// the one-hot control lines the banks understand, and hands it to the addressed bank. A bank
// runs one command at a time, so a command for a busy bank stalls the host port (host_ready
// low) while commands for other banks would be taken; banks therefore work in parallel. When
// banks finish, the lowest-numbered one with a result is reported on the response port and
// acknowledged when the host takes it.
//
// Interface: host_valid/host_ready with host_cmd, host_bank and host_args; rsp_valid/rsp_ready
// with rsp_bank and rsp_rdata (the line of a READ; the bank's read buffer otherwise). Per-bank
// vectors connect to the banks. stall is high in every cycle a valid command waits for a busy
// bank. The dispatch path is combinational (no added cycle).
//
// The five commands and their decoding into separate control signals follow the source; the
// handshakes, the fixed-priority response arbitration and the host-side encoding are this
// design's choice.
module pimc
  import odin_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 128
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
  output logic                          stall,
  // bank side
  output logic [NUM_BANKS-1:0]          bank_valid,
  input  logic [NUM_BANKS-1:0]          bank_ready,
  output bank_cmd_t                     bank_cmd,
  input  logic [NUM_BANKS-1:0]          bank_done,
  output logic [NUM_BANKS-1:0]          bank_ack,
  input  line_t                         bank_rdata [NUM_BANKS]
);
  localparam int unsigned BW = $clog2(NUM_BANKS);

  assign bank_cmd.ctl  = decode_cmd(host_cmd);
  assign bank_cmd.args = host_args;
  assign host_ready    = bank_ready[host_bank];
  assign stall         = host_valid && !host_ready;

  always_comb begin
    bank_valid = '0;
    bank_valid[host_bank] = host_valid;
  end

  // Fixed-priority pick of a finished bank.
  always_comb begin
    rsp_valid = 1'b0;
    rsp_bank  = '0;
    for (int i = NUM_BANKS - 1; i >= 0; i--) begin
      if (bank_done[i]) begin
        rsp_valid = 1'b1;
        rsp_bank  = BW'(i);
      end
    end
  end
  assign rsp_rdata = bank_rdata[rsp_bank];

  always_comb begin
    bank_ack = '0;
    bank_ack[rsp_bank] = rsp_valid && rsp_ready;
  end

  // A host command must hold steady until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
    host_valid && !host_ready |=> host_valid && $stable(host_cmd) && $stable(host_bank));
endmodule
