// cimhe_copy_move -- in-place copy buffers (IPCB), in-place move buffers
// (IPMB) and bit-line drivers of a CiM-HE array.
//
// All writes into the array pass here and leave as one row's write data and
// a per-column write mask:
//   COPY  (IPCB): latched output column i is written back to column i.
//   MOVE  (IPMB): latched output column i is written to column i+F, F being a
//                 fixed offset (a whole number of coefficient words); the
//                 lowest F columns are left untouched.
//                 Moving c times shifts data by c*F columns.
//   CONST:       the bit-line drivers write a constant into every word
//                 (0, a single 1 at bit pos, or 2^pos - 1): the masks, q and
//                 the 1 the primitives need.
//   host write:  the bit-line drivers write outside data (Data in).
// word_en selects the coefficient words that are written (predication by the
// controller's flags). Combinational; the write itself happens in the array.
// The copy and move paths and the i -> i+F direction follow the design. The
// value of F (one coefficient word), the constant generator and per-word
// predication are this implementation's choices.
module cimhe_copy_move
  import cimhe_pkg::*;
#(
  parameter int unsigned COLS      = 1024,
  parameter int unsigned WORD_BITS = 256,
  parameter int unsigned MOVE_F    = WORD_BITS,
  parameter int unsigned WORDS     = COLS / WORD_BITS
) (
  input  uop_kind_e        kind,
  input  const_e           kconst,
  input  logic [POS_W-1:0] pos,
  input  logic [WORDS-1:0] word_en,
  input  logic [COLS-1:0]  latch_q,   // OUT of the output latch
  input  logic             host_we,
  input  logic [COLS-1:0]  host_data,
  output logic             we,
  output logic [COLS-1:0]  wdata,
  output logic [WORDS-1:0] wword     // per-word write enable
);
  localparam int unsigned MOVE_WORDS = MOVE_F / WORD_BITS;
  localparam logic [WORDS-1:0] MOVE_KEEP = WORDS'((1 << MOVE_WORDS) - 1);

  logic [WORD_BITS-1:0] kword;

  always_comb begin
    case (kconst)
      K_BIT:     kword = WORD_BITS'(1) << pos;
      K_LOWMASK: kword = (WORD_BITS'(1) << pos) - WORD_BITS'(1);
      default:   kword = '0;
    endcase
  end

  always_comb begin
    we    = 1'b0;
    wdata = '0;
    wword = '0;
    if (host_we) begin
      we    = 1'b1;
      wdata = host_data;
      wword = '1;
    end else begin
      case (kind)
        U_COPY: begin
          we    = 1'b1;
          wdata = latch_q;
          wword = word_en;
        end
        U_MOVE: begin
          we    = 1'b1;
          wdata = latch_q << MOVE_F;
          wword = word_en & ~MOVE_KEEP;
        end
        U_CONST: begin
          we    = 1'b1;
          wdata = {WORDS{kword}};
          wword = word_en;
        end
        default: ;
      endcase
    end
  end
  // The move offset is a whole number of coefficient words.
  initial assert (MOVE_F % WORD_BITS == 0 && MOVE_F < COLS)
    else $error("cimhe_copy_move: MOVE_F must be a multiple of WORD_BITS below COLS");
endmodule
