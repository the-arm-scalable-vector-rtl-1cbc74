// Shared types and constants of the SVE execution unit.
//
// The vector length is counted in units of 128 bits ("LEN" of the register
// picture: a Z register is LEN x 128 bits, a predicate LEN x 16 bits, one
// predicate bit per vector byte).  The architecture allows LEN = 1..16
// (128..2048 bits); ARCH_LEN_MAX is that upper limit.  Element sizes are 8,
// 16, 32 and 64 bits; an element of E bytes is enabled by the predicate bit
// of its lowest byte.
//
// The micro-operation (sve_uop_t) is this design's own interface: it stands
// for an instruction already decoded by the host core's front end, because
// the individual instruction encodings are not part of what is built here.
package sve_pkg;

  localparam int ARCH_LEN_MAX = 16;   // 2048-bit architectural limit
  localparam int NUM_ZREGS    = 32;
  localparam int NUM_PREGS    = 16;

  // element size, log2 of bytes
  typedef enum logic [1:0] {
    ESZ_B = 2'd0,
    ESZ_H = 2'd1,
    ESZ_S = 2'd2,
    ESZ_D = 2'd3
  } esz_e;

  typedef enum logic [5:0] {
    OP_NOP,
    // predicate generation
    OP_PTRUE, OP_PFALSE, OP_WHILELT, OP_WHILELO, OP_PNEXT,
    OP_BRKA, OP_BRKB, OP_PAND, OP_PORR, OP_PEOR,
    OP_RDFFR, OP_SETFFR, OP_WRFFR,
    // scalar results
    OP_INC, OP_INCP, OP_CTERMEQ, OP_CTERMNE,
    // vector data processing
    OP_DUP, OP_CPY, OP_INDEX, OP_MOVPRFX,
    OP_ADD, OP_SUB, OP_MUL, OP_MLA, OP_AND, OP_ORR, OP_EOR,
    OP_CMPEQ, OP_CMPNE, OP_CMPLT, OP_CMPGE,
    // horizontal reductions
    OP_EORV, OP_ORV, OP_ANDV, OP_UADDV,
    // double-precision floating point
    OP_FMLA, OP_FADDA,
    // memory
    OP_LD1, OP_LDFF1, OP_LD1R, OP_ST1,
    OP_LD1_GATHER, OP_LDFF1_GATHER, OP_ST1_SCATTER
  } sve_op_e;

  typedef struct packed {
    sve_op_e     op;
    esz_e        esz;
    logic [4:0]  zd;        // destination (or accumulator / store data)
    logic [4:0]  zn;
    logic [4:0]  zm;
    logic [3:0]  pd;        // predicate destination
    logic [3:0]  pg;        // governing predicate; data-processing and memory use pg[2:0]
    logic [3:0]  pn;
    logic [3:0]  pm;
    logic        setflags;  // the "S" forms (brkbs, rdffrs, ptrues, ...)
    logic        zeroing;   // p/z when set, p/m when clear
    logic        unpred;    // unpredicated form (movprfx, add, eor, ...)
    logic        use_imm;   // second operand is imm instead of zm
    logic [63:0] xn;        // scalar operand (base address, while start, ...)
    logic [63:0] xm;        // scalar operand (index, while limit, ...)
    logic [63:0] imm;       // immediate (multiplier of inc, step of index, ...)
  } sve_uop_t;

  typedef struct packed {
    logic n;
    logic z;
    logic c;
    logic v;
  } nzcv_t;

  // one element-sized memory access of the cracked load/store unit
  typedef struct packed {
    logic [63:0] addr;
    logic        we;
    esz_e        size;
    logic [63:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic [63:0] rdata;
    logic        fault;   // translation or permission fault of this access
  } mem_rsp_t;

  function automatic logic is_mem_op(sve_op_e op);
    return op inside {OP_LD1, OP_LDFF1, OP_LD1R, OP_ST1,
                      OP_LD1_GATHER, OP_LDFF1_GATHER, OP_ST1_SCATTER};
  endfunction

endpackage
