// ppimce_pkg: types and constants shared by the in-memory computing engine.
//
// The engine is a scheduler (IMC-IS) in front of many identical IMC cores. A host
// processor hands it C-Insts (custom instructions); every core turns a C-Inst into a
// run of 128-bit micro-instructions that steer its compute-enabled memory (CEM), its
// shifter and its LUT fabric in the same cycle.
//
// Taken from the paper: the 128-bit micro-instruction and the width of each of its
// fields (LUT fabric 1+1 bits, shifter 1+5 bits, each of the four CEM arrays 1 enable
// + 3 function + 26 address bits), the four 1 KB CEM arrays per core, the 16 KB uIM,
// the 16 KB OA-CAM and C-Inst Bank, the C-Inst classes (Half-Gate, FreeXOR,
// polynomial add/sub/permute/multiply/reduce, NTT, INTT, uIM write, LUT write).
// Choices of this design: the 32-bit CEM word (a 128-bit GC label spans the four
// arrays, one 32-bit lane each), the split of the 26 CEM address bits into two
// 8-bit source rows, an 8-bit destination row and a 2-bit write-driver source, the
// opcode numbers, the 64-bit C-Inst layout and the function codes listed below.
package ppimce_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_ARR     = 4;            // CEM arrays (tiles) per IMC-PE
  localparam int unsigned WORD_W    = 32;           // bits per CEM array word
  localparam int unsigned LINE_W    = N_ARR*WORD_W; // 128: one GC label / AES state
  localparam int unsigned ROW_AW    = 8;            // 256 rows x 32 bit = 1 KB per array
  localparam int unsigned ROWS      = 1 << ROW_AW;
  localparam int unsigned UI_W      = 128;          // micro-instruction width
  localparam int unsigned UIM_AW    = 10;           // 1024 x 128 bit = 16 KB uIM
  localparam int unsigned ADDR_W    = 16;           // operand address field of a C-Inst
  localparam int unsigned CINST_W   = 64;           // one C-Inst = 8 bytes
  localparam int unsigned SEQ_LEN_W = UIM_AW + 1;   // length of a micro-instruction run

  // Row codes in a micro-instruction that the core controller replaces by the
  // operand addresses of the C-Inst being executed.
  localparam logic [ROW_AW-1:0] ROW_SRC0 = 8'hFD;
  localparam logic [ROW_AW-1:0] ROW_SRC1 = 8'hFE;
  localparam logic [ROW_AW-1:0] ROW_DST  = 8'hFF;

  // ---------------------------------------------------------------- C-Inst
  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_FREEXOR  = 4'd1,   // GC
    OP_HALFGATE = 4'd2,   // GC
    OP_PADD     = 4'd3,   // HE polynomial addition
    OP_PSUB     = 4'd4,   // HE polynomial subtraction
    OP_PMUL     = 4'd5,   // HE coefficient-wise multiplication
    OP_PRED     = 4'd6,   // HE modular reduction
    OP_PPERM    = 4'd7,   // HE permutation (automorphism), in-core part
    OP_NTT      = 4'd8,
    OP_INTT     = 4'd9,
    OP_UIM_WR   = 4'd10,  // write 32 bits of a micro-instruction / a decoder entry
    OP_LUT_WR   = 4'd11   // write one byte of a LUT table
  } cinst_op_e;

  // 64-bit C-Inst as seen by the scheduler and the cores.
  //  GC/HE ops : src0, src1 input addresses, dst output address.
  //  OP_UIM_WR : dst[15]=0 -> uIM word dst[11:2], 32-bit chunk dst[1:0], data {src1,src0}
  //              dst[15]=1 -> decoder entry for opcode dst[3:0]:
  //                           start = src0[UIM_AW-1:0], length = src1[SEQ_LEN_W-1:0]
  //  OP_LUT_WR : table src1[1:0] (0: T0 RA/CAM array, 1: T1, 2: T2), index src0[7:0],
  //              data imm[7:0]
  typedef struct packed {
    cinst_op_e         op;
    logic [11:0]       imm;
    logic [ADDR_W-1:0] dst;
    logic [ADDR_W-1:0] src1;
    logic [ADDR_W-1:0] src0;
  } cinst_t;

  function automatic logic is_gc_op(cinst_op_e op);
    return (op == OP_FREEXOR) || (op == OP_HALFGATE);
  endfunction

  function automatic logic is_exec_op(cinst_op_e op);
    return (op != OP_NOP) && (op != OP_UIM_WR) && (op != OP_LUT_WR);
  endfunction

  // ---------------------------------------------------------------- micro-instruction
  // CEM array function code (3 bits). The operation acts on the words of rows ra and rb.
  typedef enum logic [2:0] {
    CEM_READ = 3'd0,  // result = A
    CEM_AND  = 3'd1,
    CEM_OR   = 3'd2,
    CEM_XOR  = 3'd3,
    CEM_NOT  = 3'd4,  // result = ~A
    CEM_ADD  = 3'd5,  // result = A + B
    CEM_ADDC = 3'd6,  // result = A + B + 1 (subtraction with a NOTed subtrahend)
    CEM_RDB  = 3'd7   // result = B
  } cem_fn_e;

  // Source the write driver puts on row rd.
  typedef enum logic [1:0] {
    WS_NONE  = 2'd0,
    WS_CEM   = 2'd1,  // this array's own result
    WS_SHIFT = 2'd2,  // this array's lane of the shifter output buffer
    WS_LUT   = 2'd3   // this array's lane of the LUT output buffer
  } wsrc_e;

  typedef struct packed {  // 30 bits
    logic              en;
    cem_fn_e           fn;
    logic [ROW_AW-1:0] ra;
    logic [ROW_AW-1:0] rb;
    logic [ROW_AW-1:0] rd;
    wsrc_e             wsrc;
  } cem_ctl_t;

  // Shifter function code (5 bits) = {class[1:0], arg[2:0]}.
  //  class 0: arg 0 pass, 1 ShiftRows, 2 InvShiftRows, 3 MSB extension of each
  //           32-bit lane, 4 LSB extension of the 128-bit line, others pass
  //  class 1: shift each lane left  by 2**arg (arg>=5 gives 0)
  //  class 2: shift each lane right by 2**arg (logical)
  //  class 3: rotate each lane left by 2**arg (mod 32)
  localparam logic [1:0] SH_MISC = 2'd0, SH_SHL = 2'd1, SH_SHR = 2'd2, SH_ROTL = 2'd3;
  localparam logic [2:0] SH_PASS = 3'd0, SH_SROWS = 3'd1, SH_ISROWS = 3'd2,
                         SH_MSBX = 3'd3, SH_LSBX = 3'd4;

  typedef struct packed {  // 6 bits
    logic       en;
    logic [1:0] cls;
    logic [2:0] arg;
  } sh_ctl_t;

  typedef struct packed {  // 2 bits
    logic en;
    logic mode;  // 0: XOR-tree mode (SubBytes+MixColumns), 1: direct lookup
  } lut_ctl_t;

  typedef struct packed {  // 2 + 6 + 4*30 = 128 bits
    lut_ctl_t                lut;
    sh_ctl_t                 shft;
    cem_ctl_t [N_ARR-1:0]    cem;
  } uinst_t;

endpackage
