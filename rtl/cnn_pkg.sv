// cnn_pkg: types and constants shared by the convolution co-processor.
//
// Numbers are Q(16,15) fixed point: one sign bit, 16 integer bits and 15
// fractional bits in a 32-bit two's-complement word (the format the paper
// evaluates). The instruction word follows the field order of the three
// instruction formats of the architecture (TYPE, CONFIG, then the
// type-specific fields, most significant first); the field widths and the
// 64-bit word size are this design's choice, as the paper prints no bit
// positions.
//
//   MatrixWeb control  : [63:62] TYPE=0 [61:60] CONFIG [59:52] CELL BODY ID
//                        [51:40] feature width [39:28] feature depth
//                        [27:24] stride [23] zero-pad enable
//   Filter memory ctrl : [63:62] TYPE=1 [61:60] CONFIG
//                        [59:32] FILTER DETAIL = [59:52] cell body id,
//                                [51:50] kind (weights/bias/output),
//                                [49:38] depth channel
//                        [31:0]  STARTING ADDRESS
//   Input memory ctrl  : [63:62] TYPE=2 [61:60] CONFIG [31:0] STARTING ADDRESS
package cnn_pkg;

  localparam int unsigned DATA_W  = 32;   // Q(16,15) word
  localparam int unsigned FRAC_W  = 15;   // fractional bits
  localparam int unsigned ADDR_W  = 32;   // main-memory word address
  localparam int unsigned INSTR_W = 64;   // instruction word
  localparam int unsigned DIM_W   = 12;   // feature width / depth fields
  localparam int unsigned CBID_W  = 8;    // cell body id field
  localparam int unsigned STR_W   = 4;    // stride field

  typedef logic signed [DATA_W-1:0] qword_t;

  // Q(16,15) constants
  localparam qword_t Q_ONE = qword_t'(1) <<< FRAC_W;

  typedef enum logic [1:0] {
    T_MW_CTRL     = 2'd0,
    T_FILTER_MEM  = 2'd1,
    T_INPUT_MEM   = 2'd2
  } itype_e;

  // CONFIG field of a MatrixWeb control instruction
  typedef enum logic [1:0] {
    CFG_CONV  = 2'd0,   // this cell body convolves in the next layer
    CFG_FLUSH = 2'd1,   // clear its weight and bias caches, leave it idle
    CFG_STOP  = 2'd2    // end of program
  } mw_cfg_e;

  // FILTER DETAIL kind
  typedef enum logic [1:0] {
    FK_WEIGHTS = 2'd0,
    FK_BIAS    = 2'd1,
    FK_OUTPUT  = 2'd2
  } fkind_e;

  // Activation function select (Sel_AF)
  typedef enum logic [2:0] {
    AF_NONE    = 3'd0,
    AF_RELU    = 3'd1,
    AF_SIGMOID = 3'd2,
    AF_TANH    = 3'd3
  } af_sel_e;

  // Destination of a word on the input data lane
  typedef enum logic [1:0] {
    DST_DATA   = 2'd0,
    DST_WEIGHT = 2'd1,
    DST_BIAS   = 2'd2
  } dest_e;

  typedef struct packed {
    dest_e              kind;
    logic [CBID_W-1:0]  cbu;
    logic [DIM_W-1:0]   ch;
  } dest_t;

  // A word on the input lane: payload, destination and element index
  typedef struct packed {
    dest_t        dest;
    logic [15:0]  idx;
    qword_t       data;
  } lane_word_t;

  // DMA job descriptor issued by the process controller
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [23:0]       len;
    dest_t             dest;
  } dma_job_t;

  // Instruction field access
  function automatic itype_e  i_type (logic [INSTR_W-1:0] i); return itype_e'(i[63:62]); endfunction
  function automatic logic [1:0] i_cfg (logic [INSTR_W-1:0] i); return i[61:60]; endfunction
  function automatic logic [CBID_W-1:0] i_cbu (logic [INSTR_W-1:0] i); return i[59:52]; endfunction
  function automatic logic [DIM_W-1:0] i_width (logic [INSTR_W-1:0] i); return i[51:40]; endfunction
  function automatic logic [DIM_W-1:0] i_depth (logic [INSTR_W-1:0] i); return i[39:28]; endfunction
  function automatic logic [STR_W-1:0] i_stride (logic [INSTR_W-1:0] i); return i[27:24]; endfunction
  function automatic logic i_zpad (logic [INSTR_W-1:0] i); return i[23]; endfunction
  function automatic fkind_e i_fkind (logic [INSTR_W-1:0] i); return fkind_e'(i[51:50]); endfunction
  function automatic logic [DIM_W-1:0] i_fch (logic [INSTR_W-1:0] i); return i[49:38]; endfunction
  function automatic logic [ADDR_W-1:0] i_addr (logic [INSTR_W-1:0] i); return i[31:0]; endfunction

  // Instruction encoders (used by testbenches and host software models)
  function automatic logic [INSTR_W-1:0] enc_mw(mw_cfg_e cfg, int cbu, int width, int depth,
                                                int stride, bit zpad);
    logic [INSTR_W-1:0] i;
    i = '0;
    i[63:62] = T_MW_CTRL;
    i[61:60] = cfg;
    i[59:52] = CBID_W'(cbu);
    i[51:40] = DIM_W'(width);
    i[39:28] = DIM_W'(depth);
    i[27:24] = STR_W'(stride);
    i[23]    = zpad;
    return i;
  endfunction

  function automatic logic [INSTR_W-1:0] enc_filter(fkind_e kind, int cbu, int ch,
                                                    logic [ADDR_W-1:0] addr);
    logic [INSTR_W-1:0] i;
    i = '0;
    i[63:62] = T_FILTER_MEM;
    i[59:52] = CBID_W'(cbu);
    i[51:50] = kind;
    i[49:38] = DIM_W'(ch);
    i[31:0]  = addr;
    return i;
  endfunction

  function automatic logic [INSTR_W-1:0] enc_input(logic [ADDR_W-1:0] addr);
    logic [INSTR_W-1:0] i;
    i = '0;
    i[63:62] = T_INPUT_MEM;
    i[31:0]  = addr;
    return i;
  endfunction

endpackage
