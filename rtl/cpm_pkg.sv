// cpm_pkg -- types and constants shared by the Concurrent Processing Memory.
//
// A CPM is a RAM in which every word is held by a small processing element
// (PE).  Besides ordinary reads and writes, the host can broadcast one
// instruction that every activated PE executes in the same clock cycle.
// This package defines that instruction word and the bus address map.
//
// Instruction word (INSTR_W = 15 bits, carried on the low address bits of an
// instruction cycle; the operand travels on the data bus):
//   [14:11] op     alu/compare operation (op_e)
//   [10]    dst    result register for arithmetic ops: 0 = A, 1 = R
//   [9:7]   srcx   first operand  (src_e)
//   [6:4]   srcy   second operand (src_e)
//   [3:2]   chain  how a compare result is merged into S (chain_e)
//   [1]     sgn    compare / max / min treat operands as signed
//   [0]     carry  add/sub take carry-in from the left PE's S and leave
//                  carry-out in S (words of arbitrary width)
// The register names A (addressable register), R (neighbouring register)
// and S (status bit) follow the paper; the encoding is this design's own.
package cpm_pkg;

  // Operations.  MOV/ADD/SUB/MAX/MIN/ABS write dst; EQ/LT/GT write S.
  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_MOV  = 4'd1,   // dst <= x
    OP_ADD  = 4'd2,   // dst <= x + y (+ carry-in)
    OP_SUB  = 4'd3,   // dst <= x - y (- borrow-in)
    OP_MAX  = 4'd4,   // dst <= larger of x, y
    OP_MIN  = 4'd5,   // dst <= smaller of x, y
    OP_ABS  = 4'd6,   // dst <= |x| (x taken as signed)
    OP_EQ   = 4'd8,   // S  <= chain(x == y)
    OP_LT   = 4'd9,   // S  <= chain(x <  y)
    OP_GT   = 4'd10,  // S  <= chain(x >  y)
    OP_SSET = 4'd11   // S  <= chain(1)
  } op_e;

  // Members of the CPM family, in order of PE complexity.  Each contains the
  // one before: CMM moves content, CSM adds matching into S, CVM adds value
  // comparison (ordering compares, max/min), CCM adds arithmetic.
  typedef enum logic [1:0] {
    CMM = 2'd0,   // content movable memory
    CSM = 2'd1,   // content searchable memory
    CVM = 2'd2,   // content value-comparable memory
    CCM = 2'd3    // content computable memory
  } member_e;

  // Whether a family member's PE implements an operation.  Operations a
  // member lacks execute as NOP.
  function automatic logic op_supported(member_e m, op_e op);
    unique case (op)
      OP_NOP, OP_MOV:           return 1'b1;
      OP_EQ, OP_SSET:           return m >= CSM;
      OP_LT, OP_GT, OP_MAX, OP_MIN: return m >= CVM;
      OP_ADD, OP_SUB, OP_ABS:   return m >= CCM;
      default:                  return 1'b0;
    endcase
  endfunction

  // Operand sources.  Neighbour registers are the R registers of the four
  // nearest PEs (Rule 3: a PE reads the neighbouring register of a neighbour).
  typedef enum logic [2:0] {
    SRC_A     = 3'd0,
    SRC_R     = 3'd1,
    SRC_LEFT  = 3'd2,   // R of PE at address-1
    SRC_RIGHT = 3'd3,   // R of PE at address+1
    SRC_UP    = 3'd4,   // R of PE at address+COLS
    SRC_DOWN  = 3'd5,   // R of PE at address-COLS
    SRC_DATA  = 3'd6,   // operand broadcast on the data bus
    SRC_ZERO  = 3'd7
  } src_e;

  typedef enum logic [1:0] {
    CH_SET   = 2'd0,    // S <= c
    CH_AND   = 2'd1,    // S <= S & c
    CH_OR    = 2'd2,    // S <= S | c
    CH_LEFT  = 2'd3     // S <= S_left & c  (multi-PE match)
  } chain_e;

  typedef enum logic {
    DST_A = 1'b0,
    DST_R = 1'b1
  } dst_e;

  typedef struct packed {
    op_e    op;
    dst_e   dst;
    src_e   srcx;
    src_e   srcy;
    chain_e chain;
    logic   sgn;
    logic   carry;
  } instr_t;

  localparam int INSTR_W = $bits(instr_t);

  // Neighbour index order used for the neighbour buses.
  localparam int NB_LEFT  = 0;
  localparam int NB_RIGHT = 1;
  localparam int NB_UP    = 2;
  localparam int NB_DOWN  = 3;

  // Controller register map (control space, register half).
  localparam logic [3:0] REG_START      = 4'd0;  // rw first element address
  localparam logic [3:0] REG_END        = 4'd1;  // rw last element address
  localparam logic [3:0] REG_INCR       = 4'd2;  // rw address increment
  localparam logic [3:0] REG_MATCH      = 4'd3;  // r  {valid, index} of first flagged PE
  localparam logic [3:0] REG_COUNT      = 4'd4;  // r  number of flagged PEs
  localparam logic [3:0] REG_MATCH_NEXT = 4'd5;  // w  clear S of first flagged PE
  localparam logic [3:0] REG_CTX        = 4'd6;  // rw which addressable register is A

  // Build an instruction word (used by testbenches and host software).
  function automatic instr_t mk(op_e op, dst_e dst, src_e x, src_e y,
                                chain_e ch = CH_SET, logic sgn = 1'b0,
                                logic carry = 1'b0);
    instr_t i;
    i.op = op; i.dst = dst; i.srcx = x; i.srcy = y;
    i.chain = ch; i.sgn = sgn; i.carry = carry;
    return i;
  endfunction

endpackage
