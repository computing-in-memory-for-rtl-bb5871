// cimhe_sequencer -- sequencing circuit (controller) of a CiM-HE array.
//
// Accepts one polynomial primitive at a time (cmd_valid while ready) and
// issues one micro-operation per clock to the array datapath until it is
// done, then pulses done for one cycle. The two highest rows are scratch:
// S0 = ROWS-2 and S1 = ROWS-1. Every primitive ends with the reduction
// modulo q = 2^k into [-q/2, q/2):
//   RED: S1 <- 2^k-1; S0 <- S0 AND S1 (drop the bits at and above k);
//        S1 <- 2^(k-1); flag <- horizontal OR of (S0 AND S1);
//        dst <- S0; S1 <- q; S1 <- NOT S1; latch <- S0 + S1 + 1;
//        dst <- latch only in words whose flag is 1 (x - q).
//   ADD:    latch <- a + b; S0 <- latch; RED.
//   SUB:    latch <- NOT b; S0 <- latch; latch <- a + S0 + 1; S0 <- latch; RED.
//   SCALE:  S1 <- 2^(k'-1); flag <- HOR(a AND S1) (rounding flag);
//           rounds of right shifts into S0 (log shifter, see below);
//           S1 <- 1; latch <- S0 + S1; S0 <- latch where flag is 1; RED.
//   MULT:   b' <- b (controller register); dst <- 0; S0 <- a;
//           k times: latch <- dst + S0, dst <- latch where b'(i) = 1;
//                    latch <- S0 << 1, S0 <- latch;
//           S0 <- dst; RED.
//   REDUCE: S0 <- a; RED.
//   UOP:    the micro-operation in the command, once (for host-scheduled
//           steps such as the Karatsuba moves).
// Shift rounds: each round starts from all five levels on (117) and, while
// that exceeds the shifts still needed, switches off the largest level still
// on; k' = 127 thus takes 117 + 5 + 5.
// Flags and b' are per coefficient word, so conditional steps are done as
// predicated writes and every array of a bank runs the same number of cycles.
// Follows the design: the step lists of the reduction, subtraction, rounding,
// the shift-round rule and the b' register. This implementation's choices: the
// micro-operation encoding, the scratch rows, constants written by the bit-line
// drivers, the shift-round bookkeeping done in the controller rather than by an
// in-memory subtraction, a shift after every multiplier bit (standard
// shift-and-add; the published listing shifts only when the bit is 0, which
// does not form the product), and dividends treated as unsigned WORD_BITS-bit values.
module cimhe_sequencer
  import cimhe_pkg::*;
#(
  parameter int unsigned ROWS      = 8,
  parameter int unsigned COLS      = 1024,
  parameter int unsigned WORD_BITS = 256,
  parameter int unsigned WORDS     = COLS / WORD_BITS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  input  cmd_t             cmd,
  output logic             ready,
  output logic             done,
  output uop_t             uop,
  output logic [WORDS-1:0] word_en,
  input  logic [WORDS-1:0] hor_flag,
  input  logic [COLS-1:0]  latch_q,
  output logic [WORDS-1:0] flags_o
);
  localparam logic [ROW_AW-1:0] S0 = ROW_AW'(ROWS - 2);
  localparam logic [ROW_AW-1:0] S1 = ROW_AW'(ROWS - 1);

  typedef enum logic [5:0] {
    PH_IDLE,
    PH_UOP,
    A_ADD, A_CP,
    S_NOT, S_CPN, S_ADD, S_CPS,
    C_MASK, C_FLAG, C_SHIFT, C_CPS, C_ONE, C_INC, C_CPI,
    M_RDB, M_LDB, M_CLR, M_RDA, M_CPA, M_ADD, M_CPO, M_SHL, M_CPS, M_RDO, M_CPD,
    X_RD, X_CP,
    R_LOW, R_AND, R_CPL, R_MSB, R_FLG, R_RD0, R_WR0, R_Q, R_NOT, R_CPN, R_SUB, R_WRF
  } phase_e;

  phase_e           ph, ph_nx;
  cmd_t             c;
  logic [POS_W-1:0] iter, rem;
  logic             first;
  logic [WORDS-1:0] flags;
  logic [COLS-1:0]  bq;    // multiplier register b'

  assign ready   = (ph == PH_IDLE);
  assign flags_o = flags;

  // Shift mask for one right-shift round, by the design's rule.
  function automatic logic [SMASK_W-1:0] round_mask(input logic [POS_W-1:0] need,
                                                    output logic [POS_W-1:0] amount);
    logic [SMASK_W-1:0] m;
    int unsigned        sum;
    sum = 117;
    m   = '0;
    for (int l = SHIFT_LEVELS - 1; l >= 0; l--) begin
      if (sum > int'(need)) begin
        sum = sum - level_amount(l);
        m[3*l+2] = 1'b1;   // pass: level off
      end else begin
        m[3*l] = 1'b1;     // take from i+d: right shift
      end
    end
    amount = POS_W'(sum);
    return m;
  endfunction

  logic [SMASK_W-1:0] rmask;
  logic [POS_W-1:0]   ramount;
  always_comb rmask = round_mask(rem, ramount);

  // Micro-operation of the current phase.
  always_comb begin
    uop = uop_nop();
    unique case (ph)
      PH_UOP: uop = c.uop;
      A_ADD:  begin uop.kind = U_COMPUTE; uop.sel = SEL_ADD; uop.row_a = c.src_a; uop.row_b = c.src_b; uop.dual = 1'b1; end
      A_CP, S_CPN, S_CPS, C_CPS, M_CPA, M_CPS, M_CPD, X_CP, R_CPL:
              begin uop.kind = U_COPY; uop.dst = S0; end
      S_NOT:  begin uop.kind = U_COMPUTE; uop.sel = SEL_NOR; uop.row_a = c.src_b; end
      S_ADD:  begin uop.kind = U_COMPUTE; uop.sel = SEL_ADD; uop.row_a = c.src_a; uop.row_b = S0; uop.dual = 1'b1; uop.cin = 1'b1; end
      C_MASK: begin uop.kind = U_CONST; uop.dst = S1; uop.kconst = K_BIT; uop.pos = c.kprime - 1'b1; end
      C_FLAG: begin uop.kind = U_COMPUTE; uop.sel = SEL_HOR; uop.row_a = c.src_a; uop.row_b = S1; uop.dual = 1'b1; uop.flag_we = 1'b1; end
      C_SHIFT:begin uop.kind = U_COMPUTE; uop.sel = SEL_OR; uop.row_a = first ? c.src_a : S0; uop.smask = rmask; end
      C_ONE:  begin uop.kind = U_CONST; uop.dst = S1; uop.kconst = K_BIT; uop.pos = '0; end
      C_INC:  begin uop.kind = U_COMPUTE; uop.sel = SEL_ADD; uop.row_a = S0; uop.row_b = S1; uop.dual = 1'b1; end
      C_CPI:  begin uop.kind = U_COPY; uop.dst = S0; uop.pred = PRED_FLAG; end
      M_RDB:  begin uop.kind = U_COMPUTE; uop.sel = SEL_OR; uop.row_a = c.src_b; end
      M_LDB:  begin uop.kind = U_LOADB; end
      M_CLR:  begin uop.kind = U_CONST; uop.dst = c.dst; uop.kconst = K_ZERO; end
      M_RDA:  begin uop.kind = U_COMPUTE; uop.sel = SEL_OR; uop.row_a = c.src_a; end
      M_ADD:  begin uop.kind = U_COMPUTE; uop.sel = SEL_ADD; uop.row_a = c.dst; uop.row_b = S0; uop.dual = 1'b1; end
      M_CPO:  begin uop.kind = U_COPY; uop.dst = c.dst; uop.pred = PRED_BBIT; end
      M_SHL:  begin uop.kind = U_COMPUTE; uop.sel = SEL_OR; uop.row_a = S0; uop.smask = SMASK_SHL1; end
      M_RDO:  begin uop.kind = U_COMPUTE; uop.sel = SEL_OR; uop.row_a = c.dst; end
      X_RD:   begin uop.kind = U_COMPUTE; uop.sel = SEL_OR; uop.row_a = c.src_a; end
      R_LOW:  begin uop.kind = U_CONST; uop.dst = S1; uop.kconst = K_LOWMASK; uop.pos = c.qbits; end
      R_AND:  begin uop.kind = U_COMPUTE; uop.sel = SEL_HOR; uop.row_a = S0; uop.row_b = S1; uop.dual = 1'b1; end
      R_MSB:  begin uop.kind = U_CONST; uop.dst = S1; uop.kconst = K_BIT; uop.pos = c.qbits - 1'b1; end
      R_FLG:  begin uop.kind = U_COMPUTE; uop.sel = SEL_HOR; uop.row_a = S0; uop.row_b = S1; uop.dual = 1'b1; uop.flag_we = 1'b1; end
      R_RD0:  begin uop.kind = U_COMPUTE; uop.sel = SEL_OR; uop.row_a = S0; end
      R_WR0:  begin uop.kind = U_COPY; uop.dst = c.dst; end
      R_Q:    begin uop.kind = U_CONST; uop.dst = S1; uop.kconst = K_BIT; uop.pos = c.qbits; end
      R_NOT:  begin uop.kind = U_COMPUTE; uop.sel = SEL_NOR; uop.row_a = S1; end
      R_CPN:  begin uop.kind = U_COPY; uop.dst = S1; end
      R_SUB:  begin uop.kind = U_COMPUTE; uop.sel = SEL_ADD; uop.row_a = S0; uop.row_b = S1; uop.dual = 1'b1; uop.cin = 1'b1; end
      R_WRF:  begin uop.kind = U_COPY; uop.dst = c.dst; uop.pred = PRED_FLAG; end
      default: ;
    endcase
  end

  // Predication of the words written.
  always_comb begin
    for (int unsigned w = 0; w < WORDS; w++) begin
      unique case (uop.pred)
        PRED_FLAG:  word_en[w] = flags[w];
        PRED_NFLAG: word_en[w] = ~flags[w];
        PRED_BBIT:  word_en[w] = bq[w*WORD_BITS + int'(iter)];
        default:    word_en[w] = 1'b1;
      endcase
    end
  end

  // Next phase.
  always_comb begin
    ph_nx = ph;
    unique case (ph)
      PH_IDLE: if (cmd_valid) begin
        unique case (cmd.prim)
          P_ADD:    ph_nx = A_ADD;
          P_SUB:    ph_nx = S_NOT;
          P_SCALE:  ph_nx = (cmd.kprime == '0) ? C_SHIFT : C_MASK;
          P_MULT:   ph_nx = M_RDB;
          P_REDUCE: ph_nx = X_RD;
          P_UOP:    ph_nx = PH_UOP;
          default:  ph_nx = PH_IDLE;
        endcase
      end
      PH_UOP:  ph_nx = PH_IDLE;
      A_ADD:   ph_nx = A_CP;
      A_CP:    ph_nx = R_LOW;
      S_NOT:   ph_nx = S_CPN;
      S_CPN:   ph_nx = S_ADD;
      S_ADD:   ph_nx = S_CPS;
      S_CPS:   ph_nx = R_LOW;
      C_MASK:  ph_nx = C_FLAG;
      C_FLAG:  ph_nx = C_SHIFT;
      C_SHIFT: ph_nx = C_CPS;
      C_CPS:   ph_nx = (rem != '0) ? C_SHIFT : ((c.kprime == '0) ? R_LOW : C_ONE);
      C_ONE:   ph_nx = C_INC;
      C_INC:   ph_nx = C_CPI;
      C_CPI:   ph_nx = R_LOW;
      M_RDB:   ph_nx = M_LDB;
      M_LDB:   ph_nx = M_CLR;
      M_CLR:   ph_nx = M_RDA;
      M_RDA:   ph_nx = M_CPA;
      M_CPA:   ph_nx = M_ADD;
      M_ADD:   ph_nx = M_CPO;
      M_CPO:   ph_nx = M_SHL;
      M_SHL:   ph_nx = M_CPS;
      M_CPS:   ph_nx = (iter + 1'b1 >= c.qbits) ? M_RDO : M_ADD;
      M_RDO:   ph_nx = M_CPD;
      M_CPD:   ph_nx = R_LOW;
      X_RD:    ph_nx = X_CP;
      X_CP:    ph_nx = R_LOW;
      R_LOW:   ph_nx = R_AND;
      R_AND:   ph_nx = R_CPL;
      R_CPL:   ph_nx = R_MSB;
      R_MSB:   ph_nx = R_FLG;
      R_FLG:   ph_nx = R_RD0;
      R_RD0:   ph_nx = R_WR0;
      R_WR0:   ph_nx = R_Q;
      R_Q:     ph_nx = R_NOT;
      R_NOT:   ph_nx = R_CPN;
      R_CPN:   ph_nx = R_SUB;
      R_SUB:   ph_nx = R_WRF;
      R_WRF:   ph_nx = PH_IDLE;
      default: ph_nx = PH_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph    <= PH_IDLE;
      c     <= '0;
      iter  <= '0;
      rem   <= '0;
      first <= 1'b0;
      flags <= '0;
      bq    <= '0;
      done  <= 1'b0;
    end else begin
      ph   <= ph_nx;
      done <= (ph != PH_IDLE) && (ph_nx == PH_IDLE);
      if (ph == PH_IDLE && cmd_valid) begin
        c     <= cmd;
        iter  <= '0;
        rem   <= cmd.kprime;
        first <= 1'b1;
      end
      if (uop.kind == U_COMPUTE && uop.flag_we)
        flags <= hor_flag;
      if (uop.kind == U_LOADB)
        bq <= latch_q;
      if (ph == C_SHIFT) begin
        rem   <= rem - ramount;
        first <= 1'b0;
      end
      if (ph == M_CPS)
        iter <= iter + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (ph == C_SHIFT) |-> (ramount <= rem))
    else $error("cimhe_sequencer: shift round exceeds k'");
endmodule
