// inerf_pkg: constants, instruction format and operation codes shared by the
// per-bank near-memory microarchitecture and the die-level top.
//
// Sizes that come from the paper: a 1 KB row buffer (8192 bits), a 2 KB
// scratchpad, 256 INT32 and 256 FP32 PEs, 16 physical banks per die, 16 hash
// table levels with 2 MB (2^19 32-bit entries) per level, and the LPDDR4
// timing of the evaluated configuration. The instruction set (64-bit words,
// opcodes, field layout) is this design's own; the paper lists the controller
// blocks but gives no ISA.
package inerf_pkg;

  localparam int unsigned ROW_BITS   = 8192;            // 1 KB row buffer
  localparam int unsigned WORD_BITS  = 32;
  localparam int unsigned ROW_WORDS  = ROW_BITS / WORD_BITS;  // 256
  localparam int unsigned SPM_WORDS  = 2 * ROW_WORDS;   // 2 KB scratchpad
  localparam int unsigned SPM_AW     = $clog2(SPM_WORDS);
  localparam int unsigned N_LEVELS   = 16;
  localparam int unsigned INSTR_BITS = 64;
  localparam int unsigned ROW_INSTRS = ROW_BITS / INSTR_BITS; // 128
  localparam int unsigned COL_W      = $clog2(ROW_WORDS);     // word in a row
  localparam int unsigned ROWG_W     = 17;   // 128 MB bank / 1 KB rows
  localparam int unsigned LINK_BITS  = 128;  // per-bank internal data path

  typedef logic [WORD_BITS-1:0] word_t;
  typedef logic [ROW_BITS-1:0]  row_t;

  // Top-level operation of one instruction.
  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,
    OP_HALT   = 4'd1,
    OP_LDROW  = 4'd2,   // DRAM row imm -> r0 -> scratchpad line
    OP_STROW  = 4'd3,   // scratchpad line -> r0 -> DRAM row imm
    OP_LDADDR = 4'd4,   // scratchpad line -> address buffer
    OP_LDHREG = 4'd5,   // scratchpad line -> hash registers
    OP_GATHER = 4'd6,   // addr buffer -> DRAM words -> scratchpad line
    OP_SCATTER= 4'd7,   // scratchpad line words -> DRAM words at addr buffer
    OP_INT    = 4'd8,   // INT32 PE group operation
    OP_FP     = 4'd9,   // FP32 PE group operation
    OP_SEND   = 4'd10,  // scratchpad line -> r0 -> other banks
    OP_RECV   = 4'd11,  // row from bank imm[15:0] (any if imm[16]) -> scratchpad line
    OP_JUMP   = 4'd12   // fetch the next program row imm
  } opcode_e;

  typedef enum logic [3:0] {
    IOP_HASH = 4'd0,  // Morton hash of (a,b,c)+vertex, masked, plus level base
    IOP_ADD  = 4'd1,
    IOP_SUB  = 4'd2,
    IOP_MUL  = 4'd3,
    IOP_AND  = 4'd4,
    IOP_SHL  = 4'd5,
    IOP_SHR  = 4'd6,
    IOP_MOV  = 4'd7
  } iop_e;

  typedef enum logic [3:0] {
    FOP_MUL   = 4'd0,
    FOP_ADD   = 4'd1,
    FOP_SUB   = 4'd2,
    FOP_MAC   = 4'd3,  // acc <= acc + a*b, y = new acc
    FOP_MADD  = 4'd4,  // y = a*b + c
    FOP_FLOOR = 4'd5,  // y = int32(floor(a))
    FOP_I2F   = 4'd6,  // y = float(int32 a)
    FOP_RELU  = 4'd7,  // y = max(a, 0)
    FOP_DRELU = 4'd8,  // y = (a > 0) ? b : 0
    FOP_CLR   = 4'd9,  // acc <= 0
    FOP_MOV   = 4'd10  // y = a
  } fop_e;

  // 64-bit instruction word. For OP_INT/OP_FP the operand fields give the
  // crossbar pattern of each operand port: lane i reads scratchpad word
  // (base + j*stride) mod 512 with j = i, or j = i/8 when grp8 is set
  // (eight lanes per sample point, one per cube vertex); operand c always
  // uses stride 1.
  typedef struct packed {
    opcode_e          opcode;   // [63:60]
    logic             grp8;     // [59]    lanes in groups of 8 (one per cube vertex)
    logic [3:0]       sub;      // [58:55] iop_e / fop_e
    logic             line;     // [54]    scratchpad line (destination or source)
    logic             wb;       // [53]    write PE results back to 'line'
    logic             lvl_gate; // [52]    execute only in the bank owning 'level'
    logic [3:0]       level;    // [51:48]
    logic [2:0]       vertex;   // [47:45] cube vertex for IOP_HASH (XOR lane[2:0] if grp8)
    logic [SPM_AW-1:0] a_base;  // [44:36]
    logic [SPM_AW-1:0] a_stride;// [35:27]
    logic [SPM_AW-1:0] b_base;  // [26:18]
    logic [SPM_AW-1:0] b_stride;// [17:9]
    logic [SPM_AW-1:0] c_base;  // [8:0]
  } instr_t;

  // For memory-type instructions the low 36 bits are an immediate
  // (row address, gather count, destination bank mask).
  function automatic logic [35:0] instr_imm(instr_t i);
    return {i.a_base, i.a_stride, i.b_base, i.b_stride};
  endfunction

  // Transfers of the data transfer MUX (see data_mux).
  typedef enum logic [2:0] {
    DM_NONE        = 3'd0,
    DM_R0_TO_SPM   = 3'd1,
    DM_SPM_TO_R0   = 3'd2,
    DM_SPM_TO_CTRL = 3'd3,
    DM_R0_TO_CTRL  = 3'd4,
    DM_SPM_TO_HREG = 3'd5,
    DM_R0_WORD     = 3'd6,
    DM_SPM_WORD    = 3'd7
  } dm_sel_e;

  // DRAM commands issued by the bank command generator.
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_RD  = 3'd2,   // local row buffer of a subarray -> global row buffer -> r0
    CMD_WR  = 3'd3,   // r0 -> global row buffer -> local row buffer
    CMD_PRE = 3'd4
  } dram_cmd_e;

endpackage
