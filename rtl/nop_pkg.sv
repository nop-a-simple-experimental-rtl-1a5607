// nop_pkg: types and constants shared by the NOP (Null Operand Parallel)
// processor RTL.
//
// The sizes are those of the processor's reference configuration: 4
// processing units, 8 hardware threads per unit, 32-bit words, 16384 words
// of local memory per unit, 32 channel ports per thread, 4 external links
// and 8 peripheral lines. Address registers are 14 bits wide; the
// instruction pointer is 16 bits wide, and its low 2 bits select one of the
// four 8-bit opcodes in a word, least significant opcode first.
//
// All communication goes as a stream of tokens. A token is a 32-bit word
// plus a 2-bit kind: HEAD opens a path and carries the 32-bit global
// destination port number, DATA carries a payload word, END closes the
// message and the path, and PAUSE closes the path without being delivered
// to the receiving thread. The kind field is this design's own encoding:
// the processor architecture only names the END and PAUSE tokens.
package nop_pkg;

  localparam int unsigned WORD_W     = 32;
  localparam int unsigned ADDR_W     = 14;

  // Word address of the boot ROM and of the start of every unit's thread 0.
  localparam logic [ADDR_W-1:0] BOOT_ADDR = 14'h3fc0;

  // Distance of cp from lc0 and of dp from ld0.
  localparam int unsigned BASE_OFFSET = 64;

  // Routing commands held in bits 31..10 of a global port number.
  localparam logic [21:0] RC_LOCAL  = 22'd0;
  localparam logic [21:0] RC_PERIPH = 22'd1;
  localparam logic [21:0] RC_CONFIG = 22'd2;
  localparam logic [21:0] RC_FIRST_ID = 22'd8;

  typedef enum logic [1:0] {
    TK_DATA  = 2'd0,
    TK_HEAD  = 2'd1,
    TK_END   = 2'd2,
    TK_PAUSE = 2'd3
  } tok_kind_e;

  typedef struct packed {
    tok_kind_e          kind;
    logic [WORD_W-1:0]  data;
  } token_t;

  // Global port number layout.
  typedef struct packed {
    logic [21:0] route;   // processor id or routing command
    logic [1:0]  unit;
    logic [2:0]  thread;
    logic [4:0]  port;
  } gport_t;

  typedef enum logic [7:0] {
    OP_NOP      = 8'h80, OP_ADD     = 8'h81, OP_SUB     = 8'h82, OP_MUL     = 8'h83,
    OP_UDIV     = 8'h84, OP_SDIV    = 8'h85, OP_AND     = 8'h86, OP_OR      = 8'h87,
    OP_XOR      = 8'h88, OP_POP     = 8'h89, OP_DUP     = 8'h8A, OP_EXCH    = 8'h8B,
    OP_LDX      = 8'h8C, OP_SWAP    = 8'h8D, OP_DECLD   = 8'h8E, OP_LOG2    = 8'h8F,
    OP_LEFT     = 8'h90, OP_RIGHT   = 8'h91, OP_SIGN    = 8'h92, OP_ZERO    = 8'h93,
    OP_UJP      = 8'h94, OP_FJP     = 8'h95, OP_LDC     = 8'h96, OP_LD      = 8'h97,
    OP_ST       = 8'h98, OP_COUNT   = 8'h99, OP_STOP    = 8'h9A, OP_BREAK   = 8'h9B,
    OP_START    = 8'h9C, OP_CALL    = 8'h9D, OP_JUMP    = 8'h9E, OP_STX     = 8'h9F,
    OP_LDINC    = 8'hA0, OP_GETPORT = 8'hA1, OP_SETPORT = 8'hA2, OP_OUT     = 8'hA3,
    OP_OUTEND   = 8'hA4, OP_OUTPAUSE= 8'hA5, OP_IN      = 8'hA6, OP_INMORE  = 8'hA7,
    OP_EVCLEAR  = 8'hA8, OP_EVOUT   = 8'hA9, OP_EVIN    = 8'hAA, OP_EVEND   = 8'hAB,
    OP_WAIT     = 8'hAC, OP_NOW     = 8'hAD, OP_WAITTMO = 8'hAE, OP_POPN    = 8'hAF,
    OP_ULESS    = 8'hB0, OP_SLESS   = 8'hB1, OP_COMBINE = 8'hB2, OP_PORT    = 8'hB3,
    OP_LDAX     = 8'hB4, OP_THREADS = 8'hB5, OP_THRCYC  = 8'hB6, OP_CYCLES  = 8'hB7
  } opcode_e;

  // Operations of the combinational ALU.
  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_MUL, ALU_AND, ALU_OR, ALU_XOR, ALU_SWAP, ALU_LOG2,
    ALU_LEFT, ALU_RIGHT, ALU_SIGN, ALU_ZERO, ALU_COUNT, ALU_ULESS, ALU_SLESS,
    ALU_COMBINE
  } alu_op_e;

  // An opcode outside 0x80..0xBF pushes itself, sign extended.
  function automatic logic is_immediate(logic [7:0] op);
    return op[7:6] != 2'b10;
  endfunction

endpackage
