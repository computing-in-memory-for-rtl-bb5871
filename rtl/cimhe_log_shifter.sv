// cimhe_log_shifter -- five-level logarithmic shifter of a CiM-HE array.
//
// Each column i passes its operation-selector output R_i through five levels
// in series, which shift by 1, 4, 16, 32 and 64 columns. In each level three
// pass transistors connect column i to the level input of column i+d, i-d or
// i itself, selected by three bits of the 15-bit shift mask S1..S15 (S1-S3 for
// the 1-bit level, ..., S13-S15 for the 64-bit level). Exactly one of the three
// may be on per level. Taking from column i+d divides by 2^d (right shift);
// taking from i-d multiplies (left shift). A single pass can thus shift by
// any sum of the enabled levels, up to 117 in one direction.
// The output buffer inverts, so the block delivers OUT_bar.
// Combinational.
// Follows the design: the level amounts and their order, the 15-bit mask and
// the inverted output. This implementation's choices: columns are numbered
// from the least significant bit of each coefficient word, the shift stays
// inside each WORD_BITS-wide word and fills with zeros, and in each triple the
// first bit takes from i+d, the second from i-d and the third passes i.
module cimhe_log_shifter
  import cimhe_pkg::*;
#(
  parameter int unsigned COLS      = 1024,
  parameter int unsigned WORD_BITS = 256
) (
  input  logic [COLS-1:0]    r,
  input  logic [SMASK_W-1:0] smask,
  output logic [COLS-1:0]    out_n
);
  localparam int unsigned WORDS = COLS / WORD_BITS;

  logic [COLS-1:0] lvl [SHIFT_LEVELS+1];

  assign lvl[0] = r;

  for (genvar l = 0; l < SHIFT_LEVELS; l++) begin : g_lvl
    localparam int unsigned D = (l == 0) ? 1 : (l == 1) ? 4 : (l == 2) ? 16 : (l == 3) ? 32 : 64;
    logic [COLS-1:0] lin, lout;
    assign lin = lvl[l];
    for (genvar w = 0; w < WORDS; w++) begin : g_word
      logic [WORD_BITS-1:0] x;
      assign x = lin[w*WORD_BITS +: WORD_BITS];
      // one-hot select (checked below): from column i+d, i-d or i
      assign lout[w*WORD_BITS +: WORD_BITS] =
          smask[3*l]   ? (x >> D) :
          smask[3*l+1] ? (x << D) :
          smask[3*l+2] ? x : '0;
    end
    assign lvl[l+1] = lout;
  end

  assign out_n = ~lvl[SHIFT_LEVELS];

  // One and only one transistor per level.
  always_comb begin
    for (int unsigned l = 0; l < SHIFT_LEVELS; l++)
      assert ($isunknown(smask) || $countones(smask[3*l +: 3]) == 1)
        else $error("cimhe_log_shifter: level %0d mask %b is not one-hot", l, smask[3*l +: 3]);
  end
endmodule
