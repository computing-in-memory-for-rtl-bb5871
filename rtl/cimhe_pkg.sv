// cimhe_pkg -- types and constants shared by the CiM-HE compute-in-memory
// blocks.
//
// The array works one micro-operation per clock. A micro-operation either
// senses one or two rows and latches a result (COMPUTE), writes the latched
// result back through the in-place copy buffers (COPY) or the in-place move
// buffers (MOVE), drives a constant pattern onto the bit lines (CONST), or
// copies the latch into the controller's multiplier register (LOADB).
// The sequencing circuit builds the polynomial primitives out of these.
//
// The operation-selector choices (ADD, horizontal OR, OR/READ, NOR/NOT) and the
// 15-bit shift mask are the ones the design names; the encodings below are
// this implementation's own.
package cimhe_pkg;

  // Row address width: the array has M = 8 rows.
  localparam int unsigned ROW_AW = 3;
  // Bit position inside a coefficient word (words up to 512 bits).
  localparam int unsigned POS_W = 9;
  // Shift mask S1..S15: 5 levels x {from i+d, from i-d, pass}.
  localparam int unsigned SHIFT_LEVELS = 5;
  localparam int unsigned SMASK_W = 3 * SHIFT_LEVELS;

  // Operation selector inputs (Fig. "Operation selectors").
  typedef enum logic [1:0] {
    SEL_ADD = 2'd0,  // word-wise sum from the carry-select adders
    SEL_HOR = 2'd1,  // bitwise AND, whose per-word OR raises the flags
    SEL_OR  = 2'd2,  // bitwise OR; with a single row this is a read
    SEL_NOR = 2'd3   // bitwise NOR; with a single row this is NOT
  } opsel_e;

  typedef enum logic [2:0] {
    U_NOP     = 3'd0,
    U_COMPUTE = 3'd1,  // sense rows, select, shift, capture in output latch
    U_COPY    = 3'd2,  // IPCB: latch column i -> row dst, column i
    U_MOVE    = 3'd3,  // IPMB: latch column i -> row dst, column i+F
    U_CONST   = 3'd4,  // bit-line drivers write a per-word constant to dst
    U_LOADB   = 3'd5   // controller multiplier register b' <= latch
  } uop_kind_e;

  // Which coefficient words a COPY/MOVE/CONST writes.
  typedef enum logic [1:0] {
    PRED_ALL   = 2'd0,
    PRED_FLAG  = 2'd1,  // words whose flag is 1
    PRED_NFLAG = 2'd2,  // words whose flag is 0
    PRED_BBIT  = 2'd3   // words whose multiplier bit b'(i) is 1
  } pred_e;

  // Constant written to every word of a row by the bit-line drivers.
  typedef enum logic [1:0] {
    K_ZERO    = 2'd0,  // 0
    K_BIT     = 2'd1,  // single 1 at position pos (pos = 0 gives 1, pos = k gives q)
    K_LOWMASK = 2'd2   // 2^pos - 1
  } const_e;

  typedef struct packed {
    uop_kind_e           kind;
    opsel_e              sel;
    logic [ROW_AW-1:0]   row_a;
    logic [ROW_AW-1:0]   row_b;
    logic                dual;     // activate word line B as well as A
    logic                cin;      // adder carry-in (1 for subtraction)
    logic [SMASK_W-1:0]  smask;    // bit 3l: from i+d, 3l+1: from i-d, 3l+2: pass
    logic                flag_we;  // capture the horizontal-OR flags
    logic [ROW_AW-1:0]   dst;
    pred_e               pred;
    const_e              kconst;
    logic [POS_W-1:0]    pos;
  } uop_t;

  // Polynomial primitives run by the sequencing circuit.
  typedef enum logic [2:0] {
    P_NOP    = 3'd0,
    P_ADD    = 3'd1,  // dst = [a + b]_q
    P_SUB    = 3'd2,  // dst = [a - b]_q
    P_SCALE  = 3'd3,  // dst = [round(a / 2^kprime)]_q
    P_MULT   = 3'd4,  // dst = [a * b]_q, coefficient-wise shift-add
    P_REDUCE = 3'd5,  // dst = [a]_q
    P_UOP    = 3'd6   // execute cmd.uop once (host-scheduled steps)
  } prim_e;

  typedef struct packed {
    prim_e              prim;
    logic [ROW_AW-1:0]  src_a;
    logic [ROW_AW-1:0]  src_b;
    logic [ROW_AW-1:0]  dst;
    logic [POS_W-1:0]   qbits;   // k, with q = 2^k
    logic [POS_W-1:0]   kprime;  // divisor 2^k' for P_SCALE
    uop_t               uop;
  } cmd_t;

  // Shift amounts of the five log-shifter levels.
  function automatic int unsigned level_amount(int unsigned l);
    case (l)
      0: return 1;
      1: return 4;
      2: return 16;
      3: return 32;
      default: return 64;
    endcase
  endfunction

  // Mask with every level passing through (shift by 0).
  localparam logic [SMASK_W-1:0] SMASK_PASS = 15'b100_100_100_100_100;
  // Level 1 selects i-1: one-bit left shift, other levels pass.
  localparam logic [SMASK_W-1:0] SMASK_SHL1 = 15'b100_100_100_100_010;

  function automatic uop_t uop_nop();
    uop_t u;
    u = '0;
    u.kind  = U_NOP;
    u.smask = SMASK_PASS;
    return u;
  endfunction

endpackage
