// odin_pkg: types, constants and the stochastic-number table formula shared by the ODIN
// in-PCRAM neural-network engine.
//
// Geometry follows the PCRAM organisation the design is built on: a bank has 16 partitions,
// each 4096 wordlines by 8 kb bitlines, read and written 256 bits (one "line" or "block") at a
// time, so a row holds 32 blocks. Operands are 8-bit binary numbers, 32 per 256-bit block; a
// stochastic number (SN) is a 256-bit stream whose count of ones, divided by 256, is its value.
//
// The line address of a bank is {partition[3:0], row[11:0], block[4:0]}. The wordline index
// {partition,row} is what the row decoders see; the block index drives the 8kb:256b column mux.
//
// Own choices (the source is silent on them): the command encoding, the address layout, and the
// contents of the binary-to-stochastic lookup table given by sng_row() below.
package odin_pkg;

  localparam int unsigned LINE_BITS     = 256;  // sense amps / write drivers per bank
  localparam int unsigned OP_BITS       = 8;    // operand precision
  localparam int unsigned OPS_PER_LINE  = LINE_BITS / OP_BITS;  // 32
  localparam int unsigned SN_BITS       = 256;  // stochastic stream length (2^OP_BITS)
  localparam int unsigned PART_W        = 4;    // 16 partitions
  localparam int unsigned ROW_W         = 12;   // 4096 wordlines per partition
  localparam int unsigned BLK_W         = 5;    // 8192 / 256 = 32 blocks per row
  localparam int unsigned WL_W          = PART_W + ROW_W;
  localparam int unsigned LADDR_W       = WL_W + BLK_W;
  localparam int unsigned POOL_IN_LINES = 4;    // 4:1 pooling reads four blocks per output block
  localparam int unsigned PARTITION_BITS_PER_ROW = 8192;

  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [WL_W-1:0]    wl_t;
  typedef logic [BLK_W-1:0]   blk_t;
  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [OP_BITS-1:0] op_t;

  // Host-visible command of the ODIN channel: plain memory access or one of the five PIM
  // commands.
  typedef enum logic [2:0] {
    CMD_READ     = 3'd0,
    CMD_WRITE    = 3'd1,
    CMD_B_TO_S   = 3'd2,
    CMD_ANN_MUL  = 3'd3,
    CMD_ANN_ACC  = 3'd4,
    CMD_S_TO_B   = 3'd5,
    CMD_ANN_POOL = 3'd6
  } cmd_e;

  // One-hot control lines the PIM controller drives into a bank: the five PIM commands plus
  // the plain read and write of the regular memory controller.
  typedef struct packed {
    logic rd;
    logic wr;
    logic b_to_s;
    logic ann_mul;
    logic ann_acc;
    logic s_to_b;
    logic ann_pool;
  } ctl_t;

  // Operands of a command. a, b: source line addresses; d: destination line address;
  // zp: ReLU zero point; wdata: line to write for CMD_WRITE.
  typedef struct packed {
    laddr_t a;
    laddr_t b;
    laddr_t d;
    op_t    zp;
    line_t  wdata;
  } args_t;

  typedef struct packed {
    ctl_t  ctl;
    args_t args;
  } bank_cmd_t;

  // Array operation at the bank's sense amplifiers / write drivers.
  typedef enum logic [2:0] {
    ARR_READ  = 3'd0,  // one row, normal reference
    ARR_AND   = 3'd1,  // two rows, AND reference
    ARR_OR    = 3'd2,  // two rows, OR reference
    ARR_NOT   = 3'd3,  // one row, inverted output
    ARR_WRITE = 3'd4
  } arr_op_e;

  typedef enum logic [1:0] {
    SA_READ = 2'd0,
    SA_AND  = 2'd1,
    SA_OR   = 2'd2,
    SA_NOT  = 2'd3
  } sa_mode_e;

  function automatic wl_t wl_of(laddr_t a);
    return a[LADDR_W-1:BLK_W];
  endfunction

  function automatic blk_t blk_of(laddr_t a);
    return a[BLK_W-1:0];
  endfunction

  function automatic ctl_t decode_cmd(cmd_e c);
    ctl_t k;
    k = '0;
    unique case (c)
      CMD_READ:     k.rd       = 1'b1;
      CMD_WRITE:    k.wr       = 1'b1;
      CMD_B_TO_S:   k.b_to_s   = 1'b1;
      CMD_ANN_MUL:  k.ann_mul  = 1'b1;
      CMD_ANN_ACC:  k.ann_acc  = 1'b1;
      CMD_S_TO_B:   k.s_to_b   = 1'b1;
      CMD_ANN_POOL: k.ann_pool = 1'b1;
      default:      k          = '0;
    endcase
    return k;
  endfunction

  // Position scrambler for row v of the stochastic-number table: a bijection of 0..255 built
  // from steps that are each invertible on 8 bits (xor with a constant, multiply by an odd
  // number, xor with a right shift of itself). Each row uses its own constants so that the
  // streams of two different values are close to uncorrelated, which the AND multiplier needs.
  function automatic logic [7:0] sng_perm(logic [7:0] v, logic [7:0] k);
    logic [7:0] x, m1, c1;
    c1 = 8'(v * 8'd59 + 8'd90);
    m1 = 8'(v * 8'd158 + 8'd37) | 8'd1;
    x  = k ^ c1;
    x  = 8'(x * m1);
    x  = x ^ (x >> 3);
    x  = 8'(x * 8'd109);
    x  = x ^ (x >> 4);
    x  = 8'(x + v);
    return x;
  endfunction

  // Row v of the table: bit k is one when the scrambled position of k is below v, so the row
  // holds exactly v ones and encodes the value v/256.
  function automatic line_t sng_row(logic [7:0] v);
    line_t r;
    for (int k = 0; k < SN_BITS; k++) begin
      r[k] = (sng_perm(v, 8'(k)) < v);
    end
    return r;
  endfunction

endpackage
