// fbfq_pkg: types and constants shared by the F-BFQ accelerator.
//
// The accelerator multiplies weight matrices quantised in the Q2_K or Q3_K
// block floating-point formats by input matrices in Q8_K. A super-block (SB)
// holds 256 values split into 16 blocks of 16; each block has its own scale and
// the SB has one or two float scales. The micro-ISA opcodes (one-hot values)
// are the ones of the published opcode table. Byte layouts of the SBs follow
// the GGUF K-quant layouts (little-endian):
//   Q2_K  (84 B): scales[16] (low nibble scale, high nibble min), qs[64], d fp16, dmin fp16
//   Q3_K (110 B): hmask[32], qs[64], scales[12] (16 packed 6-bit), d fp16
//   Q8_K (292 B): d fp32, qs[256] int8, bsums[16] int16
// Each SB travels on the stream padded with zero bytes to a whole number of
// N-word groups (N = data FIFOs per type) -- this padding is a choice of this
// design, as is the 32-bit stream word.
package fbfq_pkg;

  localparam int unsigned QK       = 256;  // values per super-block
  localparam int unsigned BLK      = 16;   // values per block
  localparam int unsigned NBLK     = 16;   // blocks per super-block
  localparam int unsigned AXIS_W   = 32;   // stream word width
  localparam int unsigned N_FIFO   = 4;    // FIFOs per data type (N)

  localparam int unsigned Q2_BYTES = 84;
  localparam int unsigned Q3_BYTES = 110;
  localparam int unsigned Q8_BYTES = 292;
  localparam int unsigned MAX_SB_BYTES = 304; // Q8_K padded to 16-byte groups

  typedef enum logic [7:0] {
    OP_CONFIG = 8'h01,  // configure DSBP (sets configuration registers)
    OP_LOAD_W = 8'h02,  // load weights
    OP_LOAD_I = 8'h04,  // load inputs
    OP_MATMUL = 8'h08,  // schedule MatMul (activates DSBP)
    OP_STORE  = 8'h10   // store output
  } opcode_e;

  // weight_type control register
  typedef enum logic {WT_Q2 = 1'b0, WT_Q3 = 1'b1} wtype_e;

  // what the bit-slicer is parsing
  typedef enum logic [1:0] {SB_Q2 = 2'd0, SB_Q3 = 2'd1, SB_Q8 = 2'd2} sbkind_e;

  typedef struct packed {
    wtype_e      wtype;   // Q2_K or Q3_K weights
    logic [15:0] k_sb;    // depth in super-blocks
    logic [15:0] m_rows;  // weight rows (outputs per input column)
    logic [15:0] n_cols;  // input columns
  } cfg_t;

  // one block row of the SB weight cache
  typedef struct packed {
    logic [BLK-1:0][1:0] w_high;   // 2-bit weight part (Q2: the weight; Q3: low 2 bits)
    logic [BLK-1:0]      w_low;    // 1-bit weight part (Q3 hmask bit)
    logic [7:0]          w_scales; // Q3: 6-bit scale; Q2: {min nibble, scale nibble}
  } w_row_t;

  // one block row of the SB input cache
  typedef struct packed {
    logic [BLK-1:0][7:0] i_data;   // int8 inputs
    logic [15:0]         i_bsums;  // int16 sum of the 16 inputs
  } i_row_t;

  // stream words per SB, padded to a multiple of n words
  function automatic int unsigned sb_words(sbkind_e k, int unsigned n);
    int unsigned bytes;
    case (k)
      SB_Q2:   bytes = Q2_BYTES;
      SB_Q3:   bytes = Q3_BYTES;
      default: bytes = Q8_BYTES;
    endcase
    return ((bytes + 4*n - 1) / (4*n)) * n;
  endfunction

endpackage
