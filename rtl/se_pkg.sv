// se_pkg -- sizes, instruction encoding and pipeline tag shared by the
// controller, the memory controller and the top of the accelerator.
//
// Memory sizes follow the system architecture: 8 data banks of 512 x 80 bit,
// 4 weight banks of 320 x 80 bit, 2 bias banks of 512 x 10 bit, a 32 x 32-bit
// instruction register and a 10 x 160-bit local register buffer. An 80-bit
// word holds 8 FP10 values (8 channels at one position of the signal).
//
// The 32-bit instruction set is this design's own; only its existence is
// given. An instruction is either a configuration write (CFG, loads one of
// eight parameter registers) or an operation that runs with the parameters
// currently held:
//   [31:28] opcode
//   CFG   : [27:24] register index, [23:0] value
//   CONV  : channel-wise 1-D convolution / linear layer, [0] = ReLU
//   MMKV  : M = K^T V (8 x 8 per head) into local register buffer rows 0..7
//   MMQ   : out = Q M, Q read from data SRAM, M from the local buffer
//   EW    : element-wise out = +-(a*w) + c, [0] ReLU [1] a:=1 [2] c used [3] negate
//   ACT   : out = sigmoid(a) ([4]=0) or tanh(a) ([4]=1) through the LUT
//   LOAD  : [27:26] target (data/weight/bias/instr) [25:23] bank
//           [22:14] address [13:4] number of 80-bit words
//   STORE : [25:23] bank [22:14] address [13:4] words, data SRAM -> output
//   WAIT  : wait until the memory controller is idle
//   HALT  : stop, raise done
package se_pkg;
  import fp10_pkg::*;

  localparam int unsigned LANES      = 8;     // PE cells per PE block
  localparam int unsigned NBLK       = 2;     // PE blocks
  localparam int unsigned WORD_W     = 80;    // one SRAM word = 8 x FP10
  localparam int unsigned DBANKS     = 8;
  localparam int unsigned DDEPTH     = 512;
  localparam int unsigned WBANKS     = 4;
  localparam int unsigned WDEPTH     = 320;
  localparam int unsigned BBANKS     = 2;
  localparam int unsigned BDEPTH     = 512;
  localparam int unsigned IDEPTH     = 32;
  localparam int unsigned LRB_DEPTH  = 10;
  localparam int unsigned LRB_W      = 160;

  typedef logic [WORD_W-1:0] word_t;
  typedef fp10_t [LANES-1:0] vec8_t;        // same bits as word_t

  typedef enum logic [3:0] {
    OP_HALT  = 4'd0,
    OP_CFG   = 4'd1,
    OP_CONV  = 4'd2,
    OP_MMKV  = 4'd3,
    OP_MMQ   = 4'd4,
    OP_EW    = 4'd5,
    OP_ACT   = 4'd6,
    OP_LOAD  = 4'd7,
    OP_STORE = 4'd8,
    OP_WAIT  = 4'd9
  } opcode_e;

  typedef enum logic [1:0] {
    TGT_DATA   = 2'd0,
    TGT_WEIGHT = 2'd1,
    TGT_BIAS   = 2'd2,
    TGT_INSTR  = 2'd3
  } target_e;

  // Parameter register indices for CFG.
  localparam int unsigned R_SRC_A = 0;  // [11:9] bank, [8:0] address
  localparam int unsigned R_SRC_B = 1;
  localparam int unsigned R_SRC_C = 2;
  localparam int unsigned R_DST   = 3;
  localparam int unsigned R_LEN   = 4;  // [9:0] output length, [19:10] input length
  localparam int unsigned R_CHAN  = 5;  // [2:0] 16-channel groups (1..4), [11:3] output channel count
  localparam int unsigned R_CONV  = 6;  // [2:0] kernel, [6:3] dilation, [8:7] stride, [10:9] output step
  localparam int unsigned R_MEM   = 7;  // [8:0] weight base, [9] weight half, [18:10] bias base, [19] bias bank

  // What moves down the datapath pipeline with every issued cycle.
  typedef enum logic [2:0] {
    U_CONV = 3'd0,
    U_MMKV = 3'd1,
    U_MMQ  = 3'd2,
    U_EW   = 3'd3,
    U_ACT  = 3'd4
  } uop_kind_e;

  typedef struct packed {
    logic       valid;
    uop_kind_e  kind;
    logic       pad;        // operand position is outside the signal: data is 0
    logic [1:0] a_pair;     // data bank pair of operand a (banks 2p, 2p+1)
    logic [1:0] b_pair;     // data bank pair of operand w (EW, MMKV)
    logic [1:0] c_pair;     // data bank pair of addend c (EW)
    logic [2:0] lane;       // broadcast lane (MMKV/MMQ), LUT lane (ACT)
    logic       hi;         // ACT: upper bank of the pair
    logic       use_hold;   // MMQ: a comes from the local buffer hold row
    logic       first;      // first term of an accumulation
    logic       last;       // last term: write the result
    logic       relu;
    logic       a_one;
    logic       c_en;
    logic       neg;
    logic       func;       // ACT: 0 sigmoid, 1 tanh
    logic [3:0] lrb_row;    // MMKV result row / MMQ weight row
    logic [2:0] dst_bank;   // CONV/ACT: bank; EW/MMQ: 2*pair
    logic [2:0] dst_lane;   // CONV/ACT: lane
    logic [8:0] dst_addr;
    logic [8:0] bias_addr;
  } uop_t;

endpackage
