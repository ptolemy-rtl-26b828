// ptolemy_pkg: types and constants shared by the path-based adversarial
// detection engine (a DNN accelerator extended with partial-sum capture, a
// path constructor and an instruction dispatcher).
//
// The 24-bit instruction word and the opcodes 0000..1000 (inf, infsp, csps,
// sort, acum, genmasks, findneuron, findrf, cls) follow the published
// instruction table: bits 23-20 hold the opcode and each following 4-bit field
// names one of 16 general-purpose registers.  The encodings of the "other"
// instructions (mov, dec, jne, mul, setcsr, halt) are not published and are
// this design's own choice, as is the CSR map used to configure the units.
package ptolemy_pkg;

  localparam int unsigned DATA_W  = 16;  // activations and weights, fixed point
  localparam int unsigned ACC_W   = 32;  // MAC products and accumulators
  localparam int unsigned FRAC_W  = 8;   // fraction bits of the 16-bit operands (Q8.8)
  localparam int unsigned INSN_W  = 24;  // fixed-length instruction
  localparam int unsigned NREG    = 16;  // general-purpose registers
  localparam int unsigned REG_W   = 32;  // register width
  localparam int unsigned PC_W    = 64;  // path-constructor SRAM word
  localparam int unsigned CSR_AW  = 8;   // CSR address width

  typedef enum logic [3:0] {
    OP_INF        = 4'b0000,
    OP_INFSP      = 4'b0001,
    OP_CSPS       = 4'b0010,
    OP_SORT       = 4'b0011,
    OP_ACUM       = 4'b0100,
    OP_GENMASKS   = 4'b0101,
    OP_FINDNEURON = 4'b0110,
    OP_FINDRF     = 4'b0111,
    OP_CLS        = 4'b1000,
    OP_MOV        = 4'b1001,  // mov  rd, imm16         (own encoding)
    OP_DEC        = 4'b1010,  // dec  rd                (own encoding)
    OP_JNE        = 4'b1011,  // jne  imm16             (own encoding)
    OP_MUL        = 4'b1100,  // mul  rd, rs  (Q16.16)  (own encoding)
    OP_SETCSR     = 4'b1101,  // setcsr csr8, rs        (own encoding)
    OP_NOP        = 4'b1110,
    OP_HALT       = 4'b1111
  } opcode_e;

  typedef struct packed {
    opcode_e    op;   // 23-20
    logic [3:0] f1;   // 19-16
    logic [3:0] f2;   // 15-12
    logic [3:0] f3;   // 11-8
    logic [3:0] f4;   // 7-4
    logic [3:0] f5;   // 3-0
  } insn_t;

  // CSR map (own choice).  Written with setcsr.
  localparam logic [CSR_AW-1:0] CSR_K          = 8'h00; // reduction depth of inf/infsp
  localparam logic [CSR_AW-1:0] CSR_THD        = 8'h01; // absolute threshold phi (Q16.16)
  localparam logic [CSR_AW-1:0] CSR_MODE       = 8'h02; // 1: infsp stores masks, 0: partial sums
  localparam logic [CSR_AW-1:0] CSR_LAYER_RST  = 8'h03; // clears the accelerator layer counter
  localparam logic [CSR_AW-1:0] CSR_PATH_WORDS = 8'h04; // path length in 64-bit words (cls)
  localparam logic [CSR_AW-1:0] CSR_LT_OUT     = 8'h40; // 0x40+l : layer l output base address
  localparam logic [CSR_AW-1:0] CSR_LT_PSUM    = 8'h60; // 0x60+l : layer l partial-sum base
  localparam logic [CSR_AW-1:0] CSR_LT_RF      = 8'h70; // 0x70+l : layer l receptive-field size

  // Command to the DNN accelerator (inf / infsp / csps).
  typedef struct packed {
    opcode_e           op;
    logic [REG_W-1:0]  in_addr;     // inf/infsp: first input line
    logic [REG_W-1:0]  w_addr;      // inf/infsp: first weight line
    logic [REG_W-1:0]  out_addr;    // inf/infsp: first output line
    logic [REG_W-1:0]  psum_addr;   // infsp, csps: first partial-sum word
    logic [REG_W-1:0]  neuron_id;   // csps: output neuron (row*DIM+col)
    logic [REG_W-1:0]  layer_id;    // csps: layer whose inference is redone
  } acc_cmd_t;

  // Command to the path constructor.
  typedef struct packed {
    opcode_e           op;
    logic [REG_W-1:0]  a;           // first operand value
    logic [REG_W-1:0]  b;           // second operand value
    logic [REG_W-1:0]  c;           // third operand value
    logic [3:0]        rd;          // destination register (findneuron, findrf, cls)
  } pc_cmd_t;

  // One sort key: 32-bit signed partial sum and a tag (its offset in the
  // unsorted sequence).  Stored as one 64-bit path-constructor word.
  typedef struct packed {
    logic [31:0]        tag;
    logic signed [31:0] val;
  } entry_t;

  // Sort order of the path constructor: larger value first, then smaller tag.
  function automatic logic entry_ahead(input entry_t x, input entry_t y);
    return (x.val > y.val) || (x.val == y.val && x.tag < y.tag);
  endfunction

  typedef enum logic [1:0] {
    SP_DRAM = 2'd0,
    SP_PSUM = 2'd1,
    SP_PC   = 2'd2
  } space_e;

  typedef struct packed {
    space_e      src_space;
    logic [31:0] src_addr;
    space_e      dst_space;
    logic [31:0] dst_addr;
    logic [31:0] len;
  } dma_cmd_t;

endpackage
