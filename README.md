# ODIN: neural-network arithmetic inside a phase-change memory bank

ODIN turns the banks of a phase-change memory (PCRAM) channel into neural-network engines. The
expensive part of a layer, the multiply-accumulate, is done on *stochastic numbers*: an 8-bit
value v is stored as a 256-bit stream holding v ones, so that multiplying two values is a
bit-wise AND of their streams and a scaled addition is a bit-wise multiplex. Both are done by
the bank's own sense amplifiers, which can AND or OR two rows opened together. The rest of a
layer (conversion between binary and stochastic form, ReLU activation, max pooling) is done by a
small block of CMOS logic added next to each bank's read and write buffers. Data never leaves
the bank while a layer is computed.

This RTL describes one ODIN channel: a PIM (processing-in-memory) controller and a set of ODIN
banks, each a full-size PCRAM bank model with its added logic. It follows the published
description of ODIN (a PCRAM in-memory accelerator using hybrid binary-stochastic arithmetic,
evaluated on MLBench CNN and VGG networks); everything the description leaves open was chosen
here and is marked as such below and in each file's header.

## Stochastic numbers as used here

* **Encoding.** Unipolar: a 256-bit stream with k ones stands for k/256. Operands in memory are
  8-bit binary codes, 32 to a 256-bit line.
* **Binary to stochastic (B_TO_S).** A 256 x 256 SRAM table per bank; row v is the stream of v.
  Row v has exactly v ones, at positions given by a per-row bijection of 0..255
  (`odin_pkg::sng_row`): position k is one when `sng_perm(v,k) < v`, where `sng_perm` is a chain
  of xor-with-constant, multiply-by-odd and xor-shift steps, each invertible on 8 bits, with
  constants derived from v. Because each value has its own scrambling, the streams of two
  different values are nearly uncorrelated, and the AND of rows a and b has about a*b/256 ones
  (mean absolute error about 2 counts over random pairs). Two equal values give identical rows,
  so a*a comes out as a, not a^2/256. This is a limit of any single shared table, and the
  description does not discuss it. The table can be reprogrammed through a write port.
* **Multiplication (ANN_MUL).** AND of two rows, done by the sense amplifiers.
* **Scaled addition.** c = S.a + S'.b with S a stream of value 1/2 and S' = not S. Software
  prepares the S and S' rows. The two ANDs are ANN_MUL commands and the final OR is ANN_ACC.
  Because an accumulation reuses its own result, a fresh S row for every step keeps the
  accumulator uncorrelated with S. With a single S reused, each step discards the earlier terms.
  The end-to-end testbench uses one random S per step.
* **Stochastic to binary (S_TO_B).** A 256-bit PISO register shifts one bit per clock into an
  8-bit counter. A stream of 256 ones (the value 1.0) saturates at 255. B_TO_S followed by
  S_TO_B returns the original value exactly for 0..255.

## Bank organisation and addresses

A bank has 16 partitions of 4096 rows x 8192 bits, and reads or writes 256 bits at a time. A
*line address* (`odin_pkg::laddr_t`, 21 bits) is `{partition[3:0], row[11:0], block[4:0]}`: the
block picks one of the 32 256-bit blocks of an 8-kb row. Software keeps one partition as the
*compute partition*, scratch space for stochastic rows (the testbenches use partition 15). The
hardware does not enforce this. AND/OR reads open rows a and b of row a's partition at the same
block.

Datapath of one bank (`odin_bank`):

```
 array (pcram_array: partitions, decoders, PINATUBO sense amps, write drivers)
   |  256b sensed line                                  ^ 256b
   v                                                    |
 read_buffer --256:8 mux--> sram_lut_sng (row buffer) --+--> write_buffer
   |        \--256:32 mux--> maxpool4 --8b--.           |       ^ 8:256 demux (slot)
   '--> pop_counter --8b--> relu8 ----------+-----------'-------'
 (ANN_MUL / ANN_ACC: sensed line goes straight to the write drivers)
```

## Commands

The host sends a command with a bank number and arguments `a`, `b`, `d` (line addresses), `zp`
(ReLU zero point) and `wdata`. "row + i" below means the same block i rows further on.

| command   | flow (array operations in bold)                                              | array time (T_RD=48, T_WR=60) |
|-----------|------------------------------------------------------------------------------|-------------------|
| READ      | **read** a -> read buffer -> response                                        | 48                |
| WRITE     | wdata -> write buffer -> **write** d                                         | 60                |
| B_TO_S    | **read** a; for i=0..31: table[operand i] -> write buffer -> **write** row d+i | 48 + 32*60 = 1968 |
| ANN_MUL   | **AND-read** rows a,b -> **write** d                                         | 108               |
| ANN_ACC   | **OR-read** rows a,b -> **write** d                                          | 108               |
| S_TO_B    | for j=0..31: **read** row a+j -> pop counter (256 clk) -> ReLU -> slot j; **write** d | 32*48 + 60 = 1596 |
| ANN_POOL  | for j=0..3: **read** line a+j; for k=0..7: max of slice k -> slot 8j+k; **write** d | 4*48 + 60 = 252   |

Cycle times assume a 1 GHz clock. The 48-cycle read and 60-cycle write are not printed in the
description. They are the only per-operation costs that reproduce all five totals of its command
latency table (108 ns for ANN_MUL and ANN_ACC; 3456 ns and 3504 ns for the long commands with its
read/write counts). ANN_MUL and ANN_ACC match that table exactly: the array is busy 108 cycles.
The controller adds one cycle to take the command and one to report it, so `done` comes 110
cycles after acceptance. For the long commands the table's read/write counts (B_TO_S 33/32,
S_TO_B 32/32, ANN_POOL 32/32) count buffer-level steps, not array operations. This design runs
the array operations of the command flows listed above. Its S_TO_B also pays 256 clocks of
bit-serial pop counting per row: about 9.8 k cycles in all, against the table's 3456 ns. Counting
is not overlapped with the next read.

Commands to different banks run in parallel. A bank takes one command at a time. A command for a
busy bank holds the host port (`host_ready` low, `stall` high).

ReLU: the pop count is unsigned, so the 8-bit ReLU is implemented as `max(x, zp)`. This is ReLU
for asymmetrically quantised data whose zero is the code zp; with zp = 0 it passes every value.
The description only says "8-bit ReLU".

## Files

| file | content |
|------|---------|
| `rtl/odin_pkg.sv` | geometry constants, command/control types, table formula |
| `rtl/odin_channel.sv` | top: `pimc` + `NUM_BANKS` x `odin_bank` |
| `rtl/pimc.sv` | command decode to one-hot control lines, dispatch, stall, response arbitration |
| `rtl/odin_bank.sv` | one bank: array, buffers, table, pop counter, ReLU, pooling, control |
| `rtl/bank_control.sv` | per-bank FSM running the command flows |
| `rtl/pcram_array.sv`, `rtl/pcram_partition.sv` | behavioural model of the PCRAM array with latency |
| `rtl/pinatubo_sense_amp.sv` | behavioural model of the AND/OR/NOT sense amplifiers |
| `rtl/read_buffer.sv`, `rtl/write_buffer.sv` | buffers with 256:8, 256:32 mux and 8:256 demux |
| `rtl/sram_lut_sng.sv` | 256x256 binary-to-stochastic table |
| `rtl/pop_counter.sv` | PISO + 8-bit counter |
| `rtl/relu8.sv`, `rtl/maxpool4.sv` | activation and 4:1 max pooling |

`pcram_array`, `pcram_partition` and `pinatubo_sense_amp` model analog memory. They describe
behaviour and latency, not cells. Everything else is synthesisable logic.

## Interfaces of the top (`odin_channel`)

* Command: `host_valid`/`host_ready`, `host_cmd` (`odin_pkg::cmd_e`), `host_bank`, `host_args`
  (`args_t`: a, b, d, zp, wdata). A command is taken when both are high. Keep it stable while
  `host_ready` is low; an assertion checks this.
* Response: `rsp_valid`/`rsp_ready`, `rsp_bank`, `rsp_rdata`. There is one response per command,
  lowest bank first. `rsp_rdata` is the read line for READ.
* `lut_wr_en/addr/data`: rewrites one table row in every bank.
* `stall` and `bank_busy[]`: observation only.

## Sizes and departures

* Sizes are the described ones: 128 banks per channel (8 ranks of 16, numbered flat), each
  16 x 4096 x 8 kb = 512 Mb, 64 Gb in all. Simulating the full channel holds about 8 GB of
  array state; lower `NUM_BANKS` and `ROWS` for quick runs (the channel testbench uses 2 banks
  of 128 rows per partition).
* The description assigns breaking commands into reads and writes to the PIM controller in the
  memory controller, and also shows control logic inside each bank. Here the bank's logic runs
  the flows and the controller dispatches whole commands. The array operations are the same.
* ANN_ACC is the OR step only (as in the description's flow diagram and latency table). Its
  prose describes ANN_ACC as doing the two ANDs as well.
* Only 4:1 max pooling is built. 9:1 pooling and other activations are mentioned as possible
  extensions.
* Not included: the host processor, system bus (64 bit in the description), DMA engine, SSD,
  the conventional part of the memory controller and the ordinary main-memory channel. Also
  left out are three multiplexers listed only in the description's overhead table (16:8, 8:32,
  256:1024) with no stated role. Uploads are plain WRITE commands.
* The sense amplifiers also offer NOT, as in the PINATUBO scheme ODIN borrows, and the array
  model accepts it. No ODIN command uses it.
* No PCRAM cell effects (write endurance, drift, sense margin of two-row reads) are modelled.

## Workloads

The evaluated networks (MLBench CNN1 and CNN2 on MNIST; VGG1 and VGG2 on ImageNet) need, by
the published memory table, 0.0012 Gb, 0.0012 Gb, 2.16 Gb and 2.19 Gb. The default top holds
64 Gb (128 banks x 512 Mb), so each fits. Mapping a network onto commands is host software and is
not part of this RTL.

`tb_cnn1_fc` runs one whole layer of CNN1 in a reduced channel (16 banks, 1024 rows per
partition): the 70-input, 10-neuron output layer, one neuron per bank, all banks working at
once. The command stream is about 3200 commands: uploads, B_TO_S, 70 ANN_MULs and a 7-level
tree of scaled additions per neuron, then S_TO_B. Every tree level uses its own select row. The
tree scales the sum by 1/128, so a neuron's output code is about sum(a_i*w_i)/256/128. The
testbench checks each neuron's stream bit for bit against a model and its 8-bit output against
integer arithmetic; they agree within a few codes (typical stochastic error 3 to 8 codes of 256).
The layer takes about 68 k cycles. The larger layers of CNN2 and VGG use the same command
pattern with more rows and were not simulated.

## Simulation

All testbenches are self-checking and print `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/odin_pkg.sv tb/tb_odin_channel.sv \
          --top-module tb_odin_channel -Mdir obj && obj/Vtb_odin_channel
```

Swap in any other testbench name. Each block has its own `tb_<block>`. `tb_odin_channel` runs a
small layer step on two small banks, counts stalls, parallel banks, pop-counter saturation, ReLU
clamping and table rewrites, and checks a 4-term stochastic MAC against integer arithmetic.
`tb_odin_full` runs one layer step in banks 0 and 127 of the default top: 128 full banks,
about 8 GB of simulated array. It takes about 1.5 minutes to build and 20 s to run, and needs
about 9 GB of memory.
