// ncp_pkg: types and constants shared by the neural co-processor (NCP).
//
// The NCP executes a coarse-grained instruction set in which every neural
// instruction encodes a whole layer. An instruction is 128 bits wide and its
// low 5 bits are the operation code, as the paper gives; the 13 operations
// are the paper's (bn, relu, conv, dwconv, add, move, dsam, usam, maxp, gap,
// jump, sup, end). The numeric opcode values and the placement of all other
// fields are this design's own choice, since the paper does not publish them.
//
// Tensor memory (TM) words are TTM bytes wide. Its six banks share one word
// address space in the order of the block diagram: Bank0, Bank1 (feature
// maps, 128 KB each), Bank2, Bank3 (weights, 256 KB each), BankI (input
// image, 192 KB) and BankO (results, 32 KB): 992 KB in total.
package ncp_pkg;

  // Tiling constants of the paper's main configuration.
  parameter int TTM = 32;  // TM word width in bytes
  parameter int TOC = 16;  // output-channel parallelism
  parameter int THW = 32;  // spatial parallelism (pixels per MAC-array row)

  parameter int TM_AW = 15;       // TM word address width (31744 words)
  parameter int IM_DEPTH = 128;   // 2 KB of 128-bit instructions
  parameter int IM_AW = 7;

  // Bank sizes in words of TTM bytes (KB * 1024 / 32).
  parameter int BANK0_WORDS = 4096;  // 128 KB
  parameter int BANK1_WORDS = 4096;  // 128 KB
  parameter int BANK2_WORDS = 8192;  // 256 KB
  parameter int BANK3_WORDS = 8192;  // 256 KB
  parameter int BANKI_WORDS = 6144;  // 192 KB
  parameter int BANKO_WORDS = 1024;  // 32 KB

  typedef enum logic [4:0] {
    OP_BN     = 5'd0,
    OP_RELU   = 5'd1,
    OP_CONV   = 5'd2,
    OP_DWCONV = 5'd3,
    OP_ADD    = 5'd4,
    OP_MOVE   = 5'd5,
    OP_DSAM   = 5'd6,
    OP_USAM   = 5'd7,
    OP_MAXP   = 5'd8,
    OP_GAP    = 5'd9,
    OP_JUMP   = 5'd16,
    OP_SUP    = 5'd17,
    OP_END    = 5'd18
  } opcode_e;

  // 128-bit instruction. Packed MSB first, so `opcode` occupies bits [4:0].
  //   src0  : first operand tensor (feature map)
  //   src1  : weights (conv, dwconv), second tensor (add)
  //   src2  : BN parameter table (pairs of float32 scale, bias per channel)
  //   dst   : result tensor
  //   h, w  : input height and width in pixels
  //   cin   : input channels, cout: output channels (conv only)
  //   aux   : word count (move), residual tensor address (conv, dwconv)
  //   jump target: low IM_AW bits of dst
  typedef struct packed {
    logic [2:0]       rsvd;
    logic             k3;         // conv: 3x3 standard convolution (im2col)
    logic [15:0]      aux;
    logic [9:0]       cout;
    logic [9:0]       cin;
    logic [8:0]       w;
    logic [8:0]       h;
    logic [TM_AW-1:0] dst;
    logic [TM_AW-1:0] src2;
    logic [TM_AW-1:0] src1;
    logic [TM_AW-1:0] src0;
    logic             res_add;    // fuse element-wise add of src1 (conv, dwconv)
    logic             out_il;     // result layout: 1 interleaved, 0 pixel-major
    logic             stride2;    // stride 2 (dwconv)
    logic             bn;         // fuse batch normalisation
    logic             relu;       // fuse ReLU
    opcode_e          opcode;
  } instr_t;

  // Number of TM words reached by each bank, in address order.
  function automatic logic [2:0] tm_bank(input logic [TM_AW-1:0] a);
    if (a < 15'd4096)       return 3'd0;  // Bank0
    else if (a < 15'd8192)  return 3'd1;  // Bank1
    else if (a < 15'd16384) return 3'd2;  // Bank2
    else if (a < 15'd24576) return 3'd3;  // Bank3
    else if (a < 15'd30720) return 3'd4;  // BankI
    else                    return 3'd5;  // BankO
  endfunction

endpackage
