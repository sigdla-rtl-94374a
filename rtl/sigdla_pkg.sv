// sigdla_pkg: types and constants shared by the SigDLA accelerator.
//
// SigDLA is a deep-learning accelerator (8 PEs x 16 4-bit multipliers) extended with a
// programmable data shuffling fabric so that signal-processing kernels (FFT, FIR, DCT,
// DWT) can be rearranged into convolutions and run on the same array. This package holds
// the sizes of the datapath and memories, the bitwidth codes, the instruction opcodes and
// the per-multiplier mapping record produced by the bitwidth controller.
//
// Sizes that follow the paper: 8 PEs, 16 multipliers per PE, 64-bit buffer words, 16
// shuffling units fed from 16 buffered words, 144 KB of on-chip memory of which 16 KB is the
// signal-processing region, bitwidths 4/8/16. This design's own choices: the opcode values,
// the partial-sum and accumulator widths, bitwidth code 0/2 meaning 4/16 bits, the
// placement of the 16 KB region at the top of the memory and the DLA-side instructions
// (sequence controller and DMA), which the paper does not describe.
package sigdla_pkg;

  localparam int WORD_W    = 64;              // buffer word and array input width
  localparam int NIB_W     = 4;               // basic multiplier operand width
  localparam int N_NIB     = WORD_W / NIB_W;  // nibbles per word (16)
  localparam int N_MUL     = 16;              // 4-bit multipliers per PE
  localparam int N_PE      = 8;               // PEs (kernels computed in parallel)
  localparam int PROD_W    = 10;              // signed 5x5 product of two nibbles
  localparam int PSUM_W    = 36;              // PE partial sum
  localparam int ACC_W     = 48;              // accumulator
  localparam int MEM_DEPTH = 18432;           // 144 KB of 64-bit words
  localparam int MEM_AW    = 15;              // on-chip word address
  localparam int SP_BASE   = 16384;           // first word of the 16 KB signal-processing region
  localparam int SP_WORDS  = 2048;            // 16 KB of 64-bit words
  localparam int BANK_DEPTH = 16;             // words per bank addressed by rd-buf/wr-buf
  localparam int BUF_WORDS = 16;              // BCIF data buffer words feeding the DSU
  localparam int N_SU      = 16;              // shuffling units in the DSU
  localparam int EXT_AW    = 32;              // off-chip word address

  // Operand bitwidth codes of the ctrl-bitwidth instruction (code 1 = 8-bit follows the
  // paper's example; 0 and 2 are this design's choice; 3 is treated as 16-bit).
  typedef enum logic [1:0] {
    BW4  = 2'd0,
    BW8  = 2'd1,
    BW16 = 2'd2,
    BWRS = 2'd3
  } bw_e;

  // log2 of the number of nibbles in one operand of the given width.
  function automatic logic [1:0] bw_lognib(input logic [1:0] bw);
    case (bw)
      2'd0:    return 2'd0;
      2'd1:    return 2'd1;
      default: return 2'd2;
    endcase
  endfunction

  // Instruction: {opcode[31:0], payload[31:0]}.
  typedef enum logic [31:0] {
    OP_NOP            = 32'd0,
    OP_CTRL_BITWIDTH  = 32'd1,   // payload: data-bitwidth[31:16], weight-bitwidth[15:0]
    OP_RD_BUF         = 32'd2,   // payload: bank-start[14:8], bank-offset[7:4], length[3:0]
    OP_WR_BUF         = 32'd3,   // payload: bank-start[10:4], bank-offset[3:0]
    OP_CTRL_SHUFFLING = 32'd4,   // payload: finish-flag[12], unit-num[11:8], sel-code[7:4], split-code[3:0]
    OP_CTRL_PADDING   = 32'd5,   // payload: padding-position[31:16], padding-value[15:0]
    OP_SEQ_ACT        = 32'd6,   // payload: activation base word address
    OP_SEQ_WGT        = 32'd7,   // payload: weight base word address
    OP_SEQ_OUT        = 32'd8,   // payload: result word address; bit 31 set = on-chip at [14:0]
    OP_SEQ_RUN        = 32'd9,   // payload: steps[15:0] (words of dot product)
    OP_DMA_EXT        = 32'd10,  // payload: off-chip word address
    OP_DMA_INT        = 32'd11,  // payload: on-chip word address
    OP_DMA_LOAD       = 32'd12,  // payload: words[15:0], off-chip -> on-chip
    OP_DMA_STORE      = 32'd13   // payload: words[15:0], on-chip -> off-chip
  } opcode_e;

  // Routing of one multiplier, as decoded by the bitwidth controller.
  typedef struct packed {
    logic [3:0] a_idx;   // activation nibble feeding this multiplier
    logic [3:0] w_idx;   // weight nibble feeding this multiplier
    logic       a_sgn;   // activation nibble is the signed (top) nibble of its element
    logic       w_sgn;   // weight nibble is the signed (top) nibble of its element
    logic [2:0] shamt;   // left shift of the product in units of 4 bits (0..6)
  } mul_map_t;

endpackage
